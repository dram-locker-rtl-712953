// tb_relock_unit: self-checking test of the re-lock scheduler at its default
// 1000-instruction window.
//
// Swap records are pushed at chosen points of a stream of R/W pulses. The test
// checks that each record becomes due exactly after its 1000th following R/W
// (not one earlier), that records come out in order with their addresses, that
// a full queue refuses a record, and that a due record waits while relock_ready
// is low.
module tb_relock_unit;
  import dl_pkg::*;

  localparam int unsigned INTERVAL = 1000;
  localparam int unsigned DEPTH    = 8;

  logic      clk = 1'b0;
  logic      rst_n;
  logic      rw_pulse, force_due, rec_valid, rec_ready, relock_valid, relock_ready;
  row_addr_t rec_old, rec_new, relock_old, relock_new;
  logic [$clog2(DEPTH+1)-1:0] pending;

  int unsigned checks = 0, failures = 0;

  relock_unit dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
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

  task automatic push(row_addr_t o, row_addr_t n);
    @(negedge clk);
    rec_valid = 1'b1; rec_old = o; rec_new = n;
    #1 check(rec_ready, "record accepted");
    @(posedge clk);
    #1 rec_valid = 1'b0;
  endtask

  task automatic rw(int n);
    repeat (n) begin
      @(negedge clk);
      rw_pulse = 1'b1;
      @(posedge clk);
      #1 rw_pulse = 1'b0;
    end
  endtask

  task automatic pop_expect(row_addr_t o, row_addr_t n);
    @(negedge clk);
    check(relock_valid, "re-lock due");
    check(relock_old == o && relock_new == n, "re-lock addresses");
    relock_ready = 1'b1;
    @(posedge clk);
    #1 relock_ready = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0; rw_pulse = 0; force_due = 0; rec_valid = 0; relock_ready = 0; rec_old = '0; rec_new = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // one record: due after exactly 1000 R/W
    push(22'h000100, 22'h000200);
    rw(INTERVAL - 1);
    @(negedge clk);
    check(!relock_valid, "not due after 999 R/W");
    rw(1);
    @(negedge clk);
    check(relock_valid, "due after 1000 R/W");
    // a due record waits for relock_ready
    repeat (5) @(negedge clk);
    check(relock_valid && pending == 1, "due record held");
    pop_expect(22'h000100, 22'h000200);
    @(negedge clk);
    check(!relock_valid && pending == 0, "queue empty after pop");

    // two records 300 R/W apart
    push(22'h000111, 22'h000222);
    rw(300);
    push(22'h000333, 22'h000444);
    rw(INTERVAL - 300);
    pop_expect(22'h000111, 22'h000222);
    @(negedge clk);
    check(!relock_valid, "second record not yet due");
    rw(299);
    @(negedge clk);
    check(!relock_valid, "second record due one R/W later");
    rw(1);
    pop_expect(22'h000333, 22'h000444);

    // fill the queue, ninth record refused
    for (int i = 0; i < DEPTH; i++) push(row_addr_t'(i + 1), row_addr_t'(i + 100));
    @(negedge clk);
    rec_valid = 1'b1;
    #1 check(!rec_ready && int'(pending) == DEPTH, "full queue refuses a record");
    @(posedge clk);
    #1 rec_valid = 1'b0;
    // force_due: oldest record due at once, the rest still waiting
    rw(10);
    @(negedge clk);
    check(!relock_valid, "full queue, nothing due yet");
    force_due = 1'b1;
    pop_expect(row_addr_t'(1), row_addr_t'(100));
    force_due = 1'b0;
    @(negedge clk);
    check(!relock_valid && int'(pending) == DEPTH - 1, "forced pop removed one record");
    push(row_addr_t'(DEPTH + 1), row_addr_t'(DEPTH + 100));
    rw(INTERVAL - 10);
    for (int i = 1; i < DEPTH; i++) pop_expect(row_addr_t'(i + 1), row_addr_t'(i + 100));
    @(negedge clk);
    check(!relock_valid, "record pushed later not yet due");
    rw(10);
    pop_expect(row_addr_t'(DEPTH + 1), row_addr_t'(DEPTH + 100));
    @(negedge clk);
    check(pending == 0, "drained");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
