// tb_sequence_queue: self-checking test of the Sequence queue.
//
// Random pushes and pops with random valid/ready are compared against a
// reference queue: order, content, level, full (push_ready low at DEPTH
// entries, unless a pop happens in the same cycle) and empty (pop_valid low).
module tb_sequence_queue;
  import dl_pkg::*;

  localparam int unsigned DEPTH = 16;
  localparam int unsigned LVL_W = $clog2(DEPTH + 1);

  logic             clk = 1'b0;
  logic             rst_n;
  logic             push_valid, push_ready, pop_valid, pop_ready;
  seq_entry_t       push_data, pop_data;
  logic [LVL_W-1:0] level;

  int unsigned checks = 0, failures = 0;
  int unsigned saw_full = 0, saw_empty = 0;
  seq_entry_t  model[$];

  sequence_queue dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100_000) @(posedge clk);
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

  function automatic seq_entry_t rnd_entry();
    seq_entry_t e;
    e.kind  = seq_kind_e'($urandom_range(0, 4));
    e.row   = row_addr_t'($urandom);
    e.row2  = row_addr_t'($urandom);
    e.col   = col_addr_t'($urandom);
    e.wdata = {$urandom, $urandom};
    return e;
  endfunction

  initial begin
    rst_n = 1'b0; push_valid = 1'b0; pop_ready = 1'b0; push_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      // phases: fill-heavy, drain-heavy, balanced
      int pp;
      pp = (t % 1000 < 300) ? 90 : (t % 1000 < 600) ? 10 : 50;
      @(negedge clk);
      push_valid = ($urandom_range(0, 99) < pp);
      pop_ready  = ($urandom_range(0, 99) >= pp);
      push_data  = rnd_entry();
      #1;
      check(int'(level) == model.size(), "level");
      check(pop_valid == (model.size() != 0), "pop_valid/empty");
      check(push_ready == (model.size() < DEPTH || pop_ready), "push_ready/full");
      if (model.size() == DEPTH) saw_full++;
      if (model.size() == 0) saw_empty++;
      if (pop_valid) check(pop_data == model[0], "head data");
      @(posedge clk);
      if (pop_valid && pop_ready) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(push_data);
    end
    check(saw_full > 0, "queue reached full");
    check(saw_empty > 0, "queue reached empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
