// tb_lock_table: self-checking test of lock_table at its full default size.
//
// A reference model (a SystemVerilog queue kept packed the same way: append on
// insert, last entry moved into the hole on remove) predicts hit, index and
// occupancy for every operation. The test fills the whole table, checks that a
// further insert is refused, and runs random lookups, removes and replaces. The
// latency of every operation is checked against the documented timing:
// insert or empty search 1 cycle, search ending at index k k+3 cycles, remove
// with a move k+4 cycles.
module tb_lock_table;
  import dl_pkg::*;

  localparam int unsigned ENTRIES = 14336;
  localparam int unsigned IDX_W   = $clog2(ENTRIES);
  localparam int unsigned CNT_W   = $clog2(ENTRIES + 1);

  logic             clk = 1'b0;
  logic             rst_n;
  logic             req_valid;
  logic             req_ready;
  lt_op_e           req_op;
  row_addr_t        req_key, req_new;
  logic             resp_valid, resp_hit;
  logic [IDX_W-1:0] resp_idx;
  logic [CNT_W-1:0] count;

  int unsigned checks = 0, failures = 0;
  row_addr_t   model[$];

  lock_table dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
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

  // Run one operation, return hit/idx and the latency in cycles.
  task automatic op(lt_op_e o, row_addr_t k, row_addr_t n,
                    output bit hit, output int idx, output int cyc);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1'b1; req_op = o; req_key = k; req_new = n;
    @(posedge clk);
    #1 req_valid = 1'b0;
    cyc = 0;
    do begin
      @(posedge clk);
      cyc++;
    end while (!resp_valid && cyc < 20000);
    hit = resp_hit;
    idx = int'(resp_idx);
  endtask

  function automatic int find(row_addr_t k);
    foreach (model[i]) if (model[i] == k) return i;
    return -1;
  endfunction

  // Apply an operation to the model and to the table, compare.
  task automatic run(lt_op_e o, row_addr_t k, row_addr_t n);
    bit hit; int idx, cyc, m, exp_cyc;
    m = (o == LT_INSERT) ? -1 : find(k);
    op(o, k, n, hit, idx, cyc);
    unique case (o)
      LT_INSERT: begin
        exp_cyc = 1;
        if (model.size() < ENTRIES) begin
          check(hit && idx == model.size(), "insert index");
          model.push_back(k);
        end else begin
          check(!hit, "insert into full table refused");
        end
      end
      default: begin
        if (model.size() == 0)       exp_cyc = 1;
        else if (m < 0)              exp_cyc = model.size() + 2;
        else                         exp_cyc = m + 3;
        check(hit == (m >= 0), $sformatf("op %s key %h hit", o.name(), k));
        if (m >= 0) check(idx == m, $sformatf("op %s key %h index %0d vs %0d", o.name(), k, idx, m));
        if (m >= 0 && o == LT_REPLACE) model[m] = n;
        if (m >= 0 && o == LT_REMOVE) begin
          if (m != model.size() - 1) begin
            exp_cyc = m + 4;
            model[m] = model[model.size() - 1];
          end
          void'(model.pop_back());
        end
      end
    endcase
    check(cyc == exp_cyc, $sformatf("op %s latency %0d expected %0d", o.name(), cyc, exp_cyc));
    @(negedge clk);
    check(int'(count) == model.size(), "occupancy");
  endtask

  // unique keys: a bijective scramble of i
  function automatic row_addr_t key_of(int i);
    return row_addr_t'((i * 40503 + 12345) & ((1 << ROW_W) - 1));
  endfunction

  initial begin
    rst_n = 1'b0; req_valid = 1'b0; req_op = LT_LOOKUP; req_key = '0; req_new = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // empty table
    run(LT_LOOKUP, 22'h1234, '0);
    run(LT_REMOVE, 22'h1234, '0);

    // a few entries, exact timing cases
    for (int i = 0; i < 10; i++) run(LT_INSERT, key_of(i), '0);
    run(LT_LOOKUP, key_of(0), '0);
    run(LT_LOOKUP, key_of(9), '0);
    run(LT_LOOKUP, 22'h3FFFFF, '0);
    run(LT_REMOVE, key_of(3), '0);       // moves key 9 into slot 3
    run(LT_LOOKUP, key_of(9), '0);
    run(LT_REMOVE, key_of(9), '0);
    run(LT_REPLACE, key_of(5), 22'h2ABCDE);
    run(LT_LOOKUP, 22'h2ABCDE, '0);
    run(LT_LOOKUP, key_of(5), '0);
    run(LT_REMOVE, key_of(8), '0);       // last entry, no move

    // fill to the top
    for (int i = 100; model.size() < ENTRIES; i++) begin
      bit hit; int idx, cyc;
      op(LT_INSERT, key_of(i), '0, hit, idx, cyc);
      checks++;
      if (!hit || idx != model.size()) begin
        failures++;
        $display("FAIL fill insert %0d", i);
      end
      model.push_back(key_of(i));
    end
    @(negedge clk);
    check(int'(count) == ENTRIES, "table full");
    run(LT_INSERT, 22'h155555, '0);      // refused
    run(LT_LOOKUP, model[ENTRIES-1], '0); // deepest hit, 14335 + 3 cycles
    run(LT_LOOKUP, 22'h155555, '0);       // full miss

    // random mix
    for (int t = 0; t < 60; t++) begin
      int r;
      row_addr_t k;
      r = $urandom_range(0, 3);
      k = ($urandom_range(0, 1) == 1 && model.size() > 0)
          ? model[$urandom_range(0, model.size() - 1)]
          : row_addr_t'($urandom);
      run(lt_op_e'(r), k, row_addr_t'($urandom));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
