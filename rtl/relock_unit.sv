// relock_unit: schedules the re-locking of swapped rows.
//
// A SWAP moves protected data from a Locked Row to an Unlocked Row, where normal
// R/W instructions may reach it. The lock-table itself is left unchanged by the
// SWAP. Once RELOCK_INTERVAL (1k) further R/W instructions have passed, the
// controller must put the new address of the data into the lock-table in place of
// the old one, locking the data again. This unit remembers each finished SWAP
// and says when its re-lock is due. The 1k count follows the published design.
// Giving every SWAP its own window, counting skipped R/W instructions as well,
// and the queue depth are this design's choices.
//
// How it works. A free-running counter counts rw_pulse. Each record pushed on
// rec_valid/rec_ready is stored with the counter value at that moment in a FIFO
// of DEPTH entries. Records leave in order, so only the head needs checking:
// relock_valid is high once counter - stamp >= RELOCK_INTERVAL, and a
// relock_ready pulse pops the head once its re-lock has been carried out. Wrap-around of the counter is harmless because the
// difference is taken modulo 2^32.
// force_due makes the oldest record due at once. The controller uses it when a
// SWAP finds the queue full: waiting instead would deadlock, because the R/W
// instructions that would end the window sit behind the SWAP in the in-order
// Sequence. Re-locking early only shortens the unlocked window.
// Timing: relock_valid rises in the cycle after the edge that counts the
// RELOCK_INTERVAL-th R/W following the record's push.
module relock_unit
  import dl_pkg::*;
#(
  parameter int unsigned RELOCK_INTERVAL = 1000,
  parameter int unsigned DEPTH           = 8,
  parameter int unsigned PTR_W           = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned LVL_W           = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rw_pulse,
  input  logic             force_due,
  input  logic             rec_valid,
  output logic             rec_ready,
  input  row_addr_t        rec_old,
  input  row_addr_t        rec_new,
  output logic             relock_valid,
  input  logic             relock_ready,
  output row_addr_t        relock_old,
  output row_addr_t        relock_new,
  output logic [LVL_W-1:0] pending
);

  typedef struct packed {
    row_addr_t   old_row;
    row_addr_t   new_row;
    logic [31:0] stamp;
  } rec_t;

  rec_t             q [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic [31:0]      rw_count;
  logic             do_push, do_pop;
  rec_t             head;

  assign head         = q[rd_ptr];
  assign rec_ready    = (pending != LVL_W'(DEPTH));
  assign do_push      = rec_valid && rec_ready;
  assign relock_valid = (pending != '0) &&
                        (force_due || (rw_count - head.stamp) >= 32'(RELOCK_INTERVAL));
  assign do_pop       = relock_ready && (pending != '0);
  assign relock_old   = head.old_row;
  assign relock_new   = head.new_row;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) q[wr_ptr] <= '{old_row: rec_old, new_row: rec_new, stamp: rw_count};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      pending  <= '0;
      rw_count <= '0;
    end else begin
      if (rw_pulse) rw_count <= rw_count + 1'b1;
      if (do_push)  wr_ptr   <= inc(wr_ptr);
      if (do_pop)   rd_ptr   <= inc(rd_ptr);
      unique case ({do_push, do_pop})
        2'b10:   pending <= pending + 1'b1;
        2'b01:   pending <= pending - 1'b1;
        default: ;
      endcase
    end
  end

endmodule
