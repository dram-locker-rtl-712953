// tb_uprog_engine: self-checking test of the micro-program engine driving the
// behavioural DRAM model.
//
// 1. Default (reset) program with u0 = Locked, u1 = Unlocked, u2 = Buffer row:
//    the exact 9-command stream ACT/ACT/PRE x3 is checked, the 10-cycle run
//    time, and that the two rows' contents have been exchanged in the DRAM
//    model by RowClone copies.
// 2. The same with random back-pressure on the command stream.
// 3. A loaded program with bnez: AAP, bnez (loop count 2), no-op, done; the AAP
//    must run three times.
// 4. SWAP, bnez (count 1), done: the swap runs twice, so the rows end as they
//    started.
module tb_uprog_engine;
  import dl_pkg::*;

  localparam int unsigned IMEM_DEPTH = 16;
  localparam int unsigned PC_W = $clog2(IMEM_DEPTH);

  logic                  clk = 1'b0;
  logic                  rst_n;
  logic                  imem_we, ureg_we, loop_we, start, busy, done;
  logic [PC_W-1:0]       imem_addr, loop_target_in, start_pc;
  logic [INSTR_W-1:0]    imem_wdata;
  logic [UREG_IDX_W-1:0] ureg_idx;
  row_addr_t             ureg_wdata;
  logic [LOOP_W-1:0]     loop_cnt_in;
  logic                  cmd_valid, cmd_ready;
  dram_cmd_t             cmd;
  logic [31:0]           aap_count;

  logic  tb_ready, mdl_ready, rd_valid;
  data_t rd_data;

  int unsigned checks = 0, failures = 0;
  dram_cmd_t   log_q[$];

  uprog_engine dut (.*);

  assign cmd_ready = tb_ready && mdl_ready;

  dram_model u_dram (
    .clk, .rst_n,
    .cmd_valid (cmd_valid && tb_ready),
    .cmd_ready (mdl_ready),
    .cmd, .rd_valid, .rd_data
  );

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) log_q.push_back(cmd);

  initial begin : watchdog
    repeat (50_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic set_ureg(int i, row_addr_t r);
    @(negedge clk);
    ureg_we = 1'b1; ureg_idx = UREG_IDX_W'(i); ureg_wdata = r;
    @(negedge clk);
    ureg_we = 1'b0;
  endtask

  task automatic set_imem(int a, logic [INSTR_W-1:0] w);
    @(negedge clk);
    imem_we = 1'b1; imem_addr = PC_W'(a); imem_wdata = w;
    @(negedge clk);
    imem_we = 1'b0;
  endtask

  task automatic set_loop(int n, int tgt);
    @(negedge clk);
    loop_we = 1'b1; loop_cnt_in = LOOP_W'(n); loop_target_in = PC_W'(tgt);
    @(negedge clk);
    loop_we = 1'b0;
  endtask

  // start at pc 0, return cycles until done
  task automatic run(output int cyc);
    @(negedge clk);
    start = 1'b1; start_pc = '0;
    @(posedge clk);
    #1 start = 1'b0;
    cyc = 0;
    do begin
      @(posedge clk);
      cyc++;
    end while (!done && cyc < 1000);
    @(negedge clk);
    check(!busy, "idle after done");
  endtask

  task automatic expect_cmd(dram_op_e op, row_addr_t r);
    dram_cmd_t c;
    if (log_q.size() == 0) begin
      check(0, "missing command");
      return;
    end
    c = log_q.pop_front();
    check(c.op == op && c.row == r, $sformatf("command %s %h, expected %s %h",
          c.op.name(), c.row, op.name(), r));
  endtask

  task automatic expect_aap(row_addr_t dst, row_addr_t src);
    expect_cmd(CMD_ACT, src);
    expect_cmd(CMD_ACT, dst);
    expect_cmd(CMD_PRE, dst);
  endtask

  localparam row_addr_t LOCKED   = {4'd3, 18'h00101};
  localparam row_addr_t UNLOCKED = {4'd3, 18'h00207};
  localparam row_addr_t BUFROW   = {4'd3, 18'h3FFFF};

  task automatic fill_rows();
    for (int c = 0; c < 8; c++) begin
      u_dram.poke(LOCKED, col_addr_t'(c), 64'hAAAA_0000_0000_0000 | 64'(c));
      u_dram.poke(UNLOCKED, col_addr_t'(c), 64'h5555_0000_0000_0000 | 64'(c));
    end
  endtask

  task automatic check_rows(bit swapped, string what);
    bit ok = 1'b1;
    for (int c = 0; c < 8; c++) begin
      data_t l = 64'hAAAA_0000_0000_0000 | 64'(c);
      data_t u = 64'h5555_0000_0000_0000 | 64'(c);
      if (u_dram.peek(LOCKED, col_addr_t'(c))   != (swapped ? u : l)) ok = 1'b0;
      if (u_dram.peek(UNLOCKED, col_addr_t'(c)) != (swapped ? l : u)) ok = 1'b0;
    end
    check(ok, what);
  endtask

  initial begin
    int cyc;
    rst_n = 1'b0; imem_we = 0; ureg_we = 0; loop_we = 0; start = 0; tb_ready = 1'b1;
    imem_addr = '0; imem_wdata = '0; ureg_idx = '0; ureg_wdata = '0;
    loop_cnt_in = '0; loop_target_in = '0; start_pc = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // 1. default program
    set_ureg(0, LOCKED); set_ureg(1, UNLOCKED); set_ureg(2, BUFROW);
    fill_rows();
    run(cyc);
    check(cyc == 10, $sformatf("default SWAP program takes 10 cycles (%0d)", cyc));
    check(log_q.size() == 9, "nine DRAM commands");
    expect_aap(BUFROW, LOCKED);
    expect_aap(LOCKED, UNLOCKED);
    expect_aap(UNLOCKED, BUFROW);
    check_rows(1'b1, "rows exchanged by the SWAP program");
    check(aap_count == 3, "three row copies counted");

    // 2. back-pressure
    fork
      begin
        while (1) begin
          @(negedge clk);
          tb_ready = ($urandom_range(0, 2) != 0);
        end
      end
      begin
        run(cyc);
      end
    join_any
    disable fork;
    tb_ready = 1'b1;
    check(cyc > 10, "back-pressure lengthens the run");
    expect_aap(BUFROW, LOCKED);
    expect_aap(LOCKED, UNLOCKED);
    expect_aap(UNLOCKED, BUFROW);
    check(log_q.size() == 0, "no extra commands");
    check_rows(1'b0, "second SWAP restores the rows");

    // 3. loop: AAP u3<-u4 three times
    set_ureg(3, {4'd5, 18'h10}); set_ureg(4, {4'd5, 18'h20});
    set_imem(0, mk_aap(5'd3, 5'd4));
    set_imem(1, {OP_BNEZ, 14'd0});
    set_imem(2, {OP_NOP, 14'd0});
    set_imem(3, {OP_DONE, 14'd0});
    set_loop(2, 0);
    run(cyc);
    check(cyc == 3 * 3 + 3 + 1 + 1, $sformatf("loop program cycles %0d", cyc));
    check(log_q.size() == 9, "three AAPs issued by the loop");
    repeat (3) expect_aap({4'd5, 18'h10}, {4'd5, 18'h20});
    check(aap_count == 9, "row copies counted across runs");

    // 4. SWAP twice with bnez
    set_imem(0, mk_aap(5'd2, 5'd0));
    set_imem(1, mk_aap(5'd0, 5'd1));
    set_imem(2, mk_aap(5'd1, 5'd2));
    set_imem(3, {OP_BNEZ, 14'd0});
    set_imem(4, {OP_DONE, 14'd0});
    set_loop(1, 0);
    run(cyc);
    check(log_q.size() == 18, "two SWAPs issued");
    log_q.delete();
    check_rows(1'b0, "double SWAP leaves the rows as they were");
    check(u_dram.errors == 0, "DRAM model saw no protocol error");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
