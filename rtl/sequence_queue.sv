// sequence_queue: the "Sequence", the in-order queue of memory instructions
// waiting for the DRAM-Locker controller.
//
// Each entry is a seq_entry_t: a READ or WRITE of one column of a row, a SWAP
// (Locked Row, Unlocked Row) that the controller turns into three row copies, or
// a LOCK/UNLOCK that adds a row to or removes it from the lock-table. Holding the
// instructions in a Sequence ahead of execution follows the published design;
// the depth, the entry format and the handshakes are this design's choices.
//
// How it works: a circular buffer of DEPTH entries with read and write pointers
// and an occupancy count. push_valid/push_ready on the input, pop_valid/pop_ready
// on the output; an entry pushed at one clock edge is visible at pop_data after
// that edge. Pushing and popping in the same cycle is allowed when full.
module sequence_queue
  import dl_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned LVL_W = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  output logic             push_ready,
  input  seq_entry_t       push_data,
  output logic             pop_valid,
  input  logic             pop_ready,
  output seq_entry_t       pop_data,
  output logic [LVL_W-1:0] level
);

  seq_entry_t       buf_q [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign pop_valid  = (level != '0);
  assign push_ready = (level != LVL_W'(DEPTH)) || pop_ready;
  assign do_pop     = pop_valid && pop_ready;
  assign do_push    = push_valid && push_ready;
  assign pop_data   = buf_q[rd_ptr];

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) buf_q[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      level  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      unique case ({do_push, do_pop})
        2'b10:   level <= level + 1'b1;
        2'b01:   level <= level - 1'b1;
        default: ;
      endcase
    end
  end

endmodule
