// dram_model: behavioural model of the DRAM device, for simulation only (not
// synthesizable). It stands in for the commodity DRAM that the DRAM-Locker
// drives, including the RowClone behaviour the SWAP relies on.
//
// Storage is sparse (an associative array keyed by {row, column}; unwritten
// cells read as zero). Each bank keeps its open row. Commands:
//   ACT row  with the bank closed: opens the row.
//            with another row of the bank open (no PRE in between): RowClone,
//            every column of the open row is copied into the new row, which
//            becomes the open one.
//   RD/WR    access a column of the open row of the command's bank; reading or
//            writing a closed bank is counted in errors.
//   PRE      closes the bank.
// Read data returns RD_LAT cycles after the RD is accepted. With RANDOM_READY
// set, cmd_ready is low on random cycles to exercise back-pressure.
// act_count[row] counts activations per row, which is what RowHammer works with.
module dram_model
  import dl_pkg::*;
#(
  parameter int unsigned RD_LAT       = 3,
  parameter bit          RANDOM_READY = 1'b0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  dram_cmd_t cmd,
  output logic      rd_valid,
  output data_t     rd_data
);

  typedef logic [ROW_W+COL_W-1:0] key_t;

  data_t       mem [key_t];
  int unsigned act_count [row_addr_t];
  row_addr_t   open_row [1 << BANK_W];
  logic        open_v   [1 << BANK_W];
  int unsigned rowclones;
  int unsigned errors;

  int unsigned rd_cnt;
  logic        rd_busy;
  data_t       rd_buf;

  function automatic data_t peek(row_addr_t r, col_addr_t c);
    key_t k = {r, c};
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  function automatic void poke(row_addr_t r, col_addr_t c, data_t d);
    mem[{r, c}] = d;
  endfunction

  function automatic int unsigned acts(row_addr_t r);
    return act_count.exists(r) ? act_count[r] : 0;
  endfunction

  // Copy a whole row; only the columns present on either side need touching.
  function automatic void clone_row(row_addr_t src, row_addr_t dst);
    for (int c = 0; c < (1 << COL_W); c++) begin
      key_t ks = {src, col_addr_t'(c)};
      key_t kd = {dst, col_addr_t'(c)};
      if (mem.exists(ks))      mem[kd] = mem[ks];
      else if (mem.exists(kd)) mem.delete(kd);
    end
  endfunction

  initial begin
    rowclones = 0;
    errors    = 0;
    for (int b = 0; b < (1 << BANK_W); b++) begin
      open_v[b]   = 1'b0;
      open_row[b] = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) cmd_ready <= 1'b1;
    else        cmd_ready <= RANDOM_READY ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  always @(posedge clk) begin
    rd_valid <= 1'b0;
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rd_cnt  <= 0;
    end else begin
      if (rd_busy) begin
        if (rd_cnt <= 1) begin
          rd_valid <= 1'b1;
          rd_data  <= rd_buf;
          rd_busy  <= 1'b0;
        end else begin
          rd_cnt <= rd_cnt - 1;
        end
      end
      if (cmd_valid && cmd_ready) begin
        automatic logic [BANK_W-1:0] b = bank_of(cmd.row);
        unique case (cmd.op)
          CMD_ACT: begin
            act_count[cmd.row] = acts(cmd.row) + 1;
            if (open_v[b] && open_row[b] != cmd.row) begin
              clone_row(open_row[b], cmd.row);
              rowclones++;
            end
            open_v[b]   = 1'b1;
            open_row[b] = cmd.row;
          end
          CMD_PRE: open_v[b] = 1'b0;
          CMD_RD: begin
            if (!open_v[b] || open_row[b] != cmd.row) errors++;
            rd_buf  <= peek(cmd.row, cmd.col);
            rd_cnt  <= RD_LAT;
            rd_busy <= 1'b1;
          end
          default: begin   // CMD_WR
            if (!open_v[b] || open_row[b] != cmd.row) errors++;
            poke(cmd.row, cmd.col, cmd.wdata);
          end
        endcase
      end
    end
  end

endmodule
