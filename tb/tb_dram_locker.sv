// tb_dram_locker: end-to-end test of the DRAM-Locker at its full default size
// (14336-entry lock-table, 1000-instruction re-lock window), driving the
// behavioural DRAM model with random command back-pressure.
//
// A reference model, run in instruction order as each instruction is issued,
// predicts every response (status and read data): the set of locked rows, the
// DRAM contents (a SWAP exchanges two rows through the buffer row), the R/W
// count and the queue of pending re-locks, including the early re-lock when a
// SWAP meets a full re-lock queue. Responses are compared in order.
//
// Phases: lock the rows around two "weight" rows; normal reads and writes; a
// hammering attack on the locked rows (all skipped, and the DRAM model must see
// no activation of them); a SWAP and access to the data through the unlocked
// row; 1000 more R/W until the re-lock (checked to the exact instruction);
// unlock and not-locked cases; nine SWAPs in a row (early re-lock); a micro-
// program with a bnez loop loaded through the configuration port; and filling
// the lock-table until it reports full. Each mechanism is counted and a failure
// is counted for any that never happened.
module tb_dram_locker;
  import dl_pkg::*;

  localparam int unsigned LT_ENTRIES = 14336;
  localparam int unsigned RL_DEPTH   = 8;
  localparam int unsigned INTERVAL   = 1000;

  logic                  clk = 1'b0;
  logic                  rst_n;
  logic                  seq_valid, seq_ready, resp_valid;
  seq_entry_t            seq_entry;
  resp_t                 resp;
  logic [ROWID_W-1:0]    buffer_row_id;
  logic                  cfg_ready, cfg_imem_we, cfg_ureg_we, cfg_loop_we;
  logic [3:0]            cfg_imem_addr, cfg_loop_target;
  logic [INSTR_W-1:0]    cfg_imem_wdata;
  logic [UREG_IDX_W-1:0] cfg_ureg_idx;
  row_addr_t             cfg_ureg_wdata;
  logic [LOOP_W-1:0]     cfg_loop_cnt;
  logic                  dram_cmd_valid, dram_cmd_ready, dram_rd_valid;
  dram_cmd_t             dram_cmd;
  data_t                 dram_rd_data;
  logic [13:0]           lt_count;
  logic [4:0]            seq_level;
  logic [3:0]            relock_pending;
  logic [31:0]           stat_rw_done, stat_rw_blocked, stat_swaps, stat_relocks,
                         stat_early_relocks, stat_row_copies;

  dram_locker dut (.*);

  dram_model #(.RD_LAT(3), .RANDOM_READY(1'b1)) u_dram (
    .clk, .rst_n,
    .cmd_valid (dram_cmd_valid),
    .cmd_ready (dram_cmd_ready),
    .cmd       (dram_cmd),
    .rd_valid  (dram_rd_valid),
    .rd_data   (dram_rd_data)
  );

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---------------- reference model ----------------
  typedef logic [ROW_W+COL_W-1:0] key_t;
  typedef struct { row_addr_t old_row; row_addr_t new_row; int unsigned stamp; } rec_t;

  data_t       ref_mem [key_t];
  bit          ref_locked [row_addr_t];
  int unsigned ref_rw = 0;
  rec_t        ref_rl[$];
    int unsigned ref_prog_runs = 1; // SWAP program runs per SWAP (2 with the bnez loop)
  int unsigned exp_relocks = 0, exp_early = 0, exp_swaps = 0, exp_blocked = 0,
               exp_rw_done = 0, exp_copies = 0;
  resp_t       exp_q[$];

  function automatic data_t ref_peek(row_addr_t r, col_addr_t c);
    key_t k = {r, c};
    return ref_mem.exists(k) ? ref_mem[k] : '0;
  endfunction

  function automatic void ref_copy(row_addr_t dst, row_addr_t src);
    for (int c = 0; c < (1 << COL_W); c++) begin
      key_t ks = {src, col_addr_t'(c)};
      key_t kd = {dst, col_addr_t'(c)};
      if (ref_mem.exists(ks))      ref_mem[kd] = ref_mem[ks];
      else if (ref_mem.exists(kd)) ref_mem.delete(kd);
    end
    exp_copies++;
  endfunction

  function automatic void ref_relock_head(bit forced);
    rec_t r = ref_rl.pop_front();
    if (ref_locked.exists(r.old_row)) begin
      ref_locked.delete(r.old_row);
      ref_locked[r.new_row] = 1'b1;
      exp_relocks++;
    end
    if (forced) exp_early++;
  endfunction

  // Predict the response to e, in order.
  function automatic resp_t ref_exec(seq_entry_t e);
    resp_t r;
    row_addr_t buffer_row;
    forever begin
      if (ref_rl.size() > 0 && ref_rw - ref_rl[0].stamp >= INTERVAL) ref_relock_head(1'b0);
      else if (e.kind == SEQ_SWAP && ref_rl.size() == RL_DEPTH) ref_relock_head(1'b1);
      else break;
    end
    r.kind  = e.kind;
    r.rdata = '0;
    unique case (e.kind)
      SEQ_READ, SEQ_WRITE: begin
        ref_rw++;
        if (ref_locked.exists(e.row)) begin
          r.status = ST_BLOCKED;
          exp_blocked++;
        end else begin
          r.status = ST_OK;
          exp_rw_done++;
          if (e.kind == SEQ_READ) r.rdata = ref_peek(e.row, e.col);
          else ref_mem[{e.row, e.col}] = e.wdata;
        end
      end
      SEQ_SWAP: begin
        if (!ref_locked.exists(e.row)) r.status = ST_NOT_LOCKED;
        else begin
          r.status = ST_OK;
          buffer_row = {bank_of(e.row), buffer_row_id};
          for (int i = 0; i < ref_prog_runs; i++) begin
            ref_copy(buffer_row, e.row);
            ref_copy(e.row, e.row2);
            ref_copy(e.row2, buffer_row);
          end
          ref_rl.push_back('{old_row: e.row, new_row: e.row2, stamp: ref_rw});
          exp_swaps++;
        end
      end
      SEQ_LOCK: begin
        if (ref_locked.size() < LT_ENTRIES) begin
          ref_locked[e.row] = 1'b1;
          r.status = ST_OK;
        end else r.status = ST_FULL;
      end
      default: begin
        if (ref_locked.exists(e.row)) begin
          ref_locked.delete(e.row);
          r.status = ST_OK;
        end else r.status = ST_NOT_LOCKED;
      end
    endcase
    return r;
  endfunction

  // ---------------- stimulus ----------------
  int unsigned n_seq_full = 0, n_dram_stall = 0, n_blocked = 0, n_swap = 0,
               n_not_locked = 0, n_full = 0, n_read = 0, n_write = 0;

  always @(posedge clk) begin
    if (rst_n && seq_valid && !seq_ready) n_seq_full++;
    if (rst_n && dram_cmd_valid && !dram_cmd_ready) n_dram_stall++;
  end

  task automatic issue(seq_kind_e k, row_addr_t row, row_addr_t row2 = '0,
                       col_addr_t col = '0, data_t wdata = '0);
    seq_entry_t e;
    e.kind = k; e.row = row; e.row2 = row2; e.col = col; e.wdata = wdata;
    exp_q.push_back(ref_exec(e));
    @(negedge clk);
    seq_valid = 1'b1; seq_entry = e;
    @(posedge clk);
    while (!seq_ready) @(posedge clk);
    #1 seq_valid = 1'b0;
  endtask

  // response checker
  always @(posedge clk) begin : resp_check
    resp_t x;
    if (rst_n && resp_valid) begin
      if (exp_q.size() == 0) check(1'b0, "unexpected response");
      else begin
        x = exp_q.pop_front();
        check(resp.kind == x.kind && resp.status == x.status && resp.rdata == x.rdata,
              $sformatf("response %s %s %h, expected %s %s %h",
                        resp.kind.name(), resp.status.name(), resp.rdata,
                        x.kind.name(), x.status.name(), x.rdata));
        unique case (resp.status)
          ST_BLOCKED:    n_blocked++;
          ST_NOT_LOCKED: n_not_locked++;
          ST_FULL:       n_full++;
          default: begin
            if (resp.kind == SEQ_SWAP)  n_swap++;
            if (resp.kind == SEQ_READ)  n_read++;
            if (resp.kind == SEQ_WRITE) n_write++;
          end
        endcase
      end
    end
  end

  task automatic drain();
    int unsigned t = 0;
    while ((exp_q.size() != 0 || !cfg_ready) && t < 400000) begin
      @(posedge clk);
      t++;
    end
    @(negedge clk);
  endtask

  task automatic cfg_imem(int a, logic [INSTR_W-1:0] w);
    drain();
    cfg_imem_we = 1'b1; cfg_imem_addr = 4'(a); cfg_imem_wdata = w;
    @(negedge clk);
    cfg_imem_we = 1'b0;
  endtask

  function automatic row_addr_t R(int bank, int row);
    return {4'(bank), 18'(row)};
  endfunction

  function automatic data_t pat(row_addr_t r, int c);
    return {10'(c), r, 32'hC0DE_0000 | 32'(r[7:0])};
  endfunction

  // seed a row in both the DRAM model and the reference model
  task automatic seed_row(row_addr_t r);
    for (int c = 0; c < 4; c++) begin
      u_dram.poke(r, col_addr_t'(c), pat(r, c));
      ref_mem[{r, col_addr_t'(c)}] = pat(r, c);
    end
  endtask

  initial begin
    row_addr_t w0, w1;
    rst_n = 1'b0; seq_valid = 1'b0; seq_entry = '0;
    buffer_row_id = 18'h3FFFF;
    cfg_imem_we = 0; cfg_ureg_we = 0; cfg_loop_we = 0;
    cfg_imem_addr = '0; cfg_imem_wdata = '0; cfg_ureg_idx = '0; cfg_ureg_wdata = '0;
    cfg_loop_cnt = '0; cfg_loop_target = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    // --- A: lock the neighbours of two weight rows ---
    w0 = R(2, 'h100);
    w1 = R(2, 'h104);
    seed_row(R(2, 'h101));
    seed_row(R(2, 'h200));
    issue(SEQ_LOCK, R(2, 'h0FF));
    issue(SEQ_LOCK, R(2, 'h101));
    issue(SEQ_LOCK, R(2, 'h103));
    issue(SEQ_LOCK, R(2, 'h105));

    // --- B: normal traffic on the weight rows ---
    for (int c = 0; c < 8; c++) begin
      issue(SEQ_WRITE, w0, '0, col_addr_t'(c), pat(w0, c));
      issue(SEQ_WRITE, w1, '0, col_addr_t'(c), pat(w1, c));
    end
    for (int c = 0; c < 8; c++) begin
      issue(SEQ_READ, w0, '0, col_addr_t'(c));
      issue(SEQ_READ, w1, '0, col_addr_t'(c));
    end

    // --- C: hammering the locked aggressor rows ---
    for (int i = 0; i < 200; i++) begin
      issue(SEQ_READ, R(2, 'h101));
      issue(SEQ_WRITE, R(2, 'h103), '0, '0, 64'hDEAD_BEEF);
    end
    drain();
    check(u_dram.acts(R(2, 'h101)) == 0 && u_dram.acts(R(2, 'h103)) == 0,
          "no activation ever reached a locked row");

    // --- D: SWAP the locked row 0x101 with free row 0x200, use the data ---
    issue(SEQ_SWAP, R(2, 'h101), R(2, 'h200));
    for (int c = 0; c < 4; c++) issue(SEQ_READ, R(2, 'h200), '0, col_addr_t'(c));
    issue(SEQ_READ, R(2, 'h101));   // still locked: the SWAP leaves the table alone
    drain();
    check(u_dram.acts(R(2, 'h101)) == 2, "SWAP activated the locked row twice (copies 1 and 2)");

    // --- E: 1000 R/W after the SWAP re-lock the data at row 0x200 ---
    // R/W since the SWAP so far: 5. Continue to 1000 with ordinary traffic,
    // then row 0x200 must be open for the 1000th and locked from the 1001st.
    for (int i = 5; i < INTERVAL - 1; i++)
      issue((i % 2 == 1) ? SEQ_READ : SEQ_WRITE, R(3, 16 + (i % 32)), '0, col_addr_t'(i % 8), data_t'(i));
    issue(SEQ_READ, R(2, 'h200), '0, 0);   // 1000th: allowed
    issue(SEQ_READ, R(2, 'h200), '0, 0);   // 1001st: re-locked
    issue(SEQ_READ, R(2, 'h101), '0, 0);   // old locked address released
    drain();
    check(stat_relocks == 1, "one re-lock after 1000 R/W");

    // --- F: unlock and not-locked cases ---
    issue(SEQ_SWAP, R(2, 'h555), R(2, 'h556));
    issue(SEQ_UNLOCK, R(2, 'h555));
    issue(SEQ_UNLOCK, R(2, 'h0FF));
    issue(SEQ_READ, R(2, 'h0FF));

    // --- G: nine SWAPs in a row, the ninth forces an early re-lock ---
    for (int i = 0; i < 9; i++) begin
      seed_row(R(5, 'h300 + i));
      issue(SEQ_LOCK, R(5, 'h300 + i));
    end
    for (int i = 0; i < 9; i++) issue(SEQ_SWAP, R(5, 'h300 + i), R(5, 'h400 + i));
    for (int i = 0; i < 9; i++) issue(SEQ_READ, R(5, 'h400 + i), '0, 1);
    drain();
    check(stat_early_relocks >= 1, "early re-lock happened");

    // --- H: micro-program with a bnez loop: SWAP executed twice ---
    cfg_imem(3, {OP_BNEZ, 14'd0});
    cfg_imem(4, {OP_DONE, 14'd0});
    drain();
    cfg_loop_we = 1'b1; cfg_loop_cnt = 8'd1; cfg_loop_target = 4'd0;
    @(negedge clk);
    cfg_loop_we = 1'b0;
    ref_prog_runs = 2;
    seed_row(R(6, 'h10));
    issue(SEQ_LOCK, R(6, 'h10));
    issue(SEQ_SWAP, R(6, 'h10), R(6, 'h11));
    issue(SEQ_READ, R(6, 'h11), '0, 1);
    drain();
    ref_prog_runs = 1;
    cfg_imem(3, {OP_DONE, 14'd0});
    issue(SEQ_SWAP, R(6, 'h10), R(6, 'h11));
    issue(SEQ_READ, R(6, 'h11), '0, 1);

    // --- I: fill the lock-table ---
    drain();
    for (int i = 0; ref_locked.size() < LT_ENTRIES; i++) issue(SEQ_LOCK, R(9, i));
    issue(SEQ_LOCK, R(10, 1));                 // refused: full
    issue(SEQ_READ, R(10, 1), '0, 0);          // miss after a full traversal
    issue(SEQ_READ, R(9, 100), '0, 0);         // hit
    drain();
    check(int'(lt_count) == LT_ENTRIES, "lock-table full");

    // --- counters against the reference ---
    check(stat_rw_done == exp_rw_done, "executed R/W count");
    check(stat_rw_blocked == exp_blocked, "blocked R/W count");
    check(stat_swaps == exp_swaps, "SWAP count");
    check(stat_relocks == exp_relocks, "re-lock count");
    check(stat_early_relocks == exp_early, "early re-lock count");
    check(stat_row_copies == exp_copies, "row copy count");
    check(u_dram.errors == 0, "DRAM model saw no protocol error");
    check(exp_q.size() == 0, "all responses seen");

    // --- every mechanism happened ---
    $display("mechanisms: read=%0d write=%0d blocked=%0d swap=%0d relock=%0d early_relock=%0d",
             n_read, n_write, n_blocked, n_swap, stat_relocks, stat_early_relocks);
    $display("            not_locked=%0d table_full=%0d seq_full_cycles=%0d dram_stall_cycles=%0d rowclones=%0d",
             n_not_locked, n_full, n_seq_full, n_dram_stall, u_dram.rowclones);
    check(n_read > 0, "reads executed");
    check(n_write > 0, "writes executed");
    check(n_blocked > 0, "R/W blocked by the lock-table");
    check(n_swap > 0, "SWAP executed");
    check(stat_relocks > 0, "re-lock after the window");
    check(stat_early_relocks > 0, "early re-lock with a full queue");
    check(n_not_locked > 0, "SWAP/UNLOCK of a row not locked");
    check(n_full > 0, "lock-table full");
    check(n_seq_full > 0, "Sequence full back-pressure");
    check(n_dram_stall > 0, "DRAM back-pressure");
    check(u_dram.rowclones > 0, "RowClone copies in DRAM");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
