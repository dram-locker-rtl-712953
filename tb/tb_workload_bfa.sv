// tb_workload_bfa: the targeted bit-flip attack (BFA) and page-table attack
// (PTA) workloads on a DNN, run against the DRAM-Locker at its full default
// size.
//
// The protected model is ResNet-20 on CIFAR-10, whose 1150 most vulnerable
// weight bits are the ones to protect. Placement is the worst case for the
// lock-table: every such bit is in a row of its own. So the 2300 rows next to
// them (the aggressor rows a RowHammer attacker would activate, two per victim)
// are all locked. Victim weight row i is bank i%16, row 100+4*(i/16); its
// aggressors are the rows directly above and below it.
//
// Flow:
// 1. Inference software writes one weight word into each victim row.
// 2. The OS locks the 2300 aggressor rows.
// 3. The attacker hammers both aggressors of several target bits, T_RH + 100
//    times each, where T_RH = 1000 is the threshold taken for the defence. This
//    is interleaved with legitimate weight reads by the inference software.
// 4. The OS itself needs data held in one aggressor row. It SWAPs that row
//    with a free row, reads the data there and keeps working. The attacker
//    then hammers the new location; after the 1000-instruction window it is
//    locked as well.
// 5. Page-table attack (PTA): a page-table row is protected the same way, and
//    the attacker hammers its two neighbours with writes instead of reads,
//    T_RH + 100 times each. The page-table entries must read back intact.
//
// The checks:
// - Every response is compared, in order, with a reference model of the lock
//   semantics: status, and read data (the weights read back unchanged).
// - The attack would succeed without protection: every target got at least
//   T_RH attempted activations of each aggressor.
// - No victim row has a neighbour that the DRAM really activated T_RH times or
//   more, so no bit can flip.
// - Every attacker access to a locked row is blocked.
// - The mechanisms used (block, SWAP, re-lock, Sequence back-pressure) each
//   happened, and the controller's counters agree with the reference model.
module tb_workload_bfa;
  import dl_pkg::*;

  localparam int unsigned LT_ENTRIES = 14336;
  localparam int unsigned RL_DEPTH   = 8;
  localparam int unsigned INTERVAL   = 1000;
  localparam int unsigned T_RH       = 1000;
  localparam int unsigned N_BITS     = 1150;
  localparam int unsigned HAMMER     = T_RH + 100;
  localparam int unsigned N_TARGETS  = 3;

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
    repeat (40_000_000) @(posedge clk);
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

  // ---------------- reference model of the lock semantics ----------------
  typedef logic [ROW_W+COL_W-1:0] key_t;
  typedef struct { row_addr_t old_row; row_addr_t new_row; int unsigned stamp; } rec_t;

  data_t       ref_mem [key_t];
  bit          ref_locked [row_addr_t];
  int unsigned ref_rw = 0;
  rec_t        ref_rl[$];
  int unsigned exp_relocks = 0, exp_swaps = 0, exp_blocked = 0, exp_rw_done = 0;
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
  endfunction

  function automatic void ref_relock_head();
    rec_t r = ref_rl.pop_front();
    if (ref_locked.exists(r.old_row)) begin
      ref_locked.delete(r.old_row);
      ref_locked[r.new_row] = 1'b1;
      exp_relocks++;
    end
  endfunction

  function automatic resp_t ref_exec(seq_entry_t e);
    resp_t     r;
    row_addr_t buffer_row;
    forever begin
      if (ref_rl.size() > 0 && ref_rw - ref_rl[0].stamp >= INTERVAL) ref_relock_head();
      else if (e.kind == SEQ_SWAP && ref_rl.size() == RL_DEPTH) ref_relock_head();
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
          r.status   = ST_OK;
          buffer_row = {bank_of(e.row), buffer_row_id};
          ref_copy(buffer_row, e.row);
          ref_copy(e.row, e.row2);
          ref_copy(e.row2, buffer_row);
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

  // ---------------- stimulus and response checking ----------------
  int unsigned n_seq_full = 0, n_blocked = 0, n_swap = 0, n_weight_reads = 0;

  always @(posedge clk) begin
    if (rst_n && seq_valid && !seq_ready) n_seq_full++;
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
        if (resp.status == ST_BLOCKED) n_blocked++;
        if (resp.kind == SEQ_SWAP && resp.status == ST_OK) n_swap++;
      end
    end
  end

  task automatic drain();
    int unsigned t = 0;
    while ((exp_q.size() != 0 || !cfg_ready) && t < 4_000_000) begin
      @(posedge clk);
      t++;
    end
    @(negedge clk);
  endtask

  function automatic row_addr_t victim(int i);
    return {4'(i % 16), 18'(100 + 4 * (i / 16))};
  endfunction

  function automatic row_addr_t above(row_addr_t r);
    return {bank_of(r), r[ROWID_W-1:0] - 18'd1};
  endfunction

  function automatic row_addr_t below(row_addr_t r);
    return {bank_of(r), r[ROWID_W-1:0] + 18'd1};
  endfunction

  function automatic data_t weight(int i);
    return {32'h5EED_0000 | 32'(i), 32'(i * 2654435761)};
  endfunction

  // A legitimate inference read of a random protected weight.
  task automatic infer_read();
    int i;
    i = $urandom_range(0, N_BITS - 1);
    issue(SEQ_READ, victim(i), '0, col_addr_t'(i % 8));
    n_weight_reads++;
  endtask

  int unsigned attempts [row_addr_t];

  task automatic hammer(row_addr_t r);
    issue(SEQ_READ, r);
    attempts[r] = attempts.exists(r) ? attempts[r] + 1 : 1;
  endtask

  initial begin
    int          targets [N_TARGETS];
    int unsigned flips, would_flip, max_acts;
    row_addr_t   os_row, free_row, pt_row;
    data_t       os_data;

    rst_n = 1'b0; seq_valid = 1'b0; seq_entry = '0;
    buffer_row_id = 18'h3FFFF;
    cfg_imem_we = 0; cfg_ureg_we = 0; cfg_loop_we = 0;
    cfg_imem_addr = '0; cfg_imem_wdata = '0; cfg_ureg_idx = '0; cfg_ureg_wdata = '0;
    cfg_loop_cnt = '0; cfg_loop_target = '0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. the model's vulnerable weights are written
    for (int i = 0; i < N_BITS; i++)
      issue(SEQ_WRITE, victim(i), '0, col_addr_t'(i % 8), weight(i));

    // 2. the OS locks the aggressor rows of every vulnerable weight
    for (int i = 0; i < N_BITS; i++) begin
      issue(SEQ_LOCK, above(victim(i)));
      issue(SEQ_LOCK, below(victim(i)));
    end
    drain();
    check(int'(lt_count) == 2 * N_BITS, "2300 aggressor rows locked");

    // 3. double-sided hammering of the target bits, mixed with inference
    targets[0] = 0;
    targets[1] = N_BITS / 2;
    targets[2] = N_BITS - 1;
    for (int t = 0; t < N_TARGETS; t++) begin
      for (int h = 0; h < HAMMER; h++) begin
        hammer(above(victim(targets[t])));
        hammer(below(victim(targets[t])));
        if (h % 16 == 0) infer_read();
      end
    end
    drain();

    // 4. the OS needs the data in an aggressor row: SWAP it out and use it
    os_row   = above(victim(7));
    free_row = {bank_of(os_row), 18'h2000};
    os_data  = 64'h0123_4567_89AB_CDEF;
    pt_row   = {4'd15, 18'h30000};
    u_dram.poke(os_row, 0, os_data);
    ref_mem[{os_row, col_addr_t'(0)}] = os_data;
    issue(SEQ_SWAP, os_row, free_row);
    issue(SEQ_READ, free_row, '0, 0);
    // the attacker follows the data to its new row: the first accesses get
    // through, for as long as the re-lock window is open
    for (int h = 0; h < INTERVAL + 200; h++) begin
      hammer(free_row);
      if (h % 16 == 0) infer_read();
    end
    drain();

    // 5. page-table attack with writes
    for (int c = 0; c < 4; c++)
      issue(SEQ_WRITE, pt_row, '0, col_addr_t'(c), {32'hFA6E_0000 | 32'(c), 32'h0000_1000 * 32'(c)});
    issue(SEQ_LOCK, above(pt_row));
    issue(SEQ_LOCK, below(pt_row));
    for (int h = 0; h < HAMMER; h++) begin
      issue(SEQ_WRITE, above(pt_row), '0, col_addr_t'(h % 4), '1);
      issue(SEQ_WRITE, below(pt_row), '0, col_addr_t'(h % 4), '1);
      if (h % 64 == 0) issue(SEQ_READ, pt_row, '0, col_addr_t'((h / 64) % 4));
    end
    for (int c = 0; c < 4; c++) issue(SEQ_READ, pt_row, '0, col_addr_t'(c));
    drain();
    check(u_dram.acts(above(pt_row)) == 0 && u_dram.acts(below(pt_row)) == 0,
          "PTA: no activation of the page-table row's neighbours");

    // --- the attack failed ---
    would_flip = 0;
    foreach (targets[t])
      if (attempts[above(victim(targets[t]))] >= T_RH &&
          attempts[below(victim(targets[t]))] >= T_RH) would_flip++;
    check(would_flip == N_TARGETS, "attack would reach T_RH on every target without locking");

    flips    = 0;
    max_acts = 0;
    for (int i = 0; i < N_BITS; i++) begin
      int unsigned a, b;
      a = u_dram.acts(above(victim(i)));
      b = u_dram.acts(below(victim(i)));
      if (a >= T_RH || b >= T_RH) flips++;
      if (a > max_acts) max_acts = a;
      if (b > max_acts) max_acts = b;
    end
    check(flips == 0, "no victim row has a neighbour activated T_RH times");
    check(u_dram.acts(free_row) < T_RH, "swapped-out row stays under T_RH");
    check(stat_relocks == 1, "swapped data re-locked after the window");
    check(stat_rw_blocked == exp_blocked, "blocked R/W count");
    check(stat_rw_done == exp_rw_done, "executed R/W count");
    check(stat_swaps == exp_swaps, "SWAP count");
    check(stat_relocks == exp_relocks, "re-lock count");
    check(u_dram.errors == 0, "DRAM model saw no protocol error");
    check(exp_q.size() == 0, "all responses seen");

    $display("workload BFA: %0d locked rows, %0d hammer attempts, %0d blocked, %0d weight reads",
             2 * N_BITS + 2, 2 * N_TARGETS * HAMMER + INTERVAL + 200 + 2 * HAMMER, n_blocked, n_weight_reads);
    $display("              highest activation count of any aggressor row %0d (T_RH %0d), swaps %0d, re-locks %0d",
             max_acts, T_RH, stat_swaps, stat_relocks);
    check(n_blocked >= 2 * N_TARGETS * HAMMER + 2 * HAMMER, "every hammer on a locked row blocked");
    check(n_swap > 0, "SWAP executed");
    check(stat_relocks > 0, "re-lock executed");
    check(n_weight_reads > 0, "inference reads executed");
    check(n_seq_full > 0, "Sequence back-pressure");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
