// lock_table: the SRAM that holds the addresses of locked DRAM rows.
//
// Software (through the controller) inserts the rows it wants protected; the
// controller looks up every R/W address before it is allowed to reach DRAM, and
// after a SWAP the re-lock step replaces a locked address by the address the
// protected data was moved to.
//
// How it works. The table is a single-port synchronous SRAM of ENTRIES words
// plus an occupancy counter. Entries are kept packed in [0, count): INSERT
// appends at index count, REMOVE moves the last entry into the freed slot. A
// LOOKUP, REMOVE or REPLACE traverses the table one entry per cycle from index 0
// and stops at the first match or after the last occupied entry, so no
// comparator array (no CAM) is needed. The traversal and the 56KB capacity follow
// the published design; packing, the one-entry-per-cycle scan and the entry width
// are this design's choices.
//
// Interface. req_valid/req_ready handshake (req_ready is high only when idle);
// the result comes as a one-cycle resp_valid pulse with resp_hit and resp_idx.
//   LOOKUP  key          -> hit, idx
//   INSERT  key          -> hit=1 written, hit=0 table full
//   REMOVE  key          -> hit=1 removed, hit=0 not present
//   REPLACE key -> new   -> hit=1 replaced, hit=0 not present
// Timing, counting clock edges from the one that accepts the request (edge 0):
// resp_valid is sampled high at edge 1 for an INSERT or for a search of an empty
// table, at edge k+3 for a search that ends at index k (one cycle to prime the
// SRAM read, k+1 compare cycles, the response cycle), and at edge k+4 for a
// REMOVE that has to move the last entry into the hole.
module lock_table
  import dl_pkg::*;
#(
  parameter int unsigned ENTRIES = 14336,
  parameter int unsigned IDX_W   = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  parameter int unsigned CNT_W   = $clog2(ENTRIES + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  output logic             req_ready,
  input  lt_op_e           req_op,
  input  row_addr_t        req_key,
  input  row_addr_t        req_new,
  output logic             resp_valid,
  output logic             resp_hit,
  output logic [IDX_W-1:0] resp_idx,
  output logic [CNT_W-1:0] count
);

  typedef enum logic [2:0] {S_IDLE, S_PRIME, S_SCAN, S_MOVE, S_RESP} state_e;
  state_e state;

  // SRAM
  row_addr_t        mem [ENTRIES];
  logic             ren, wen;
  logic [IDX_W-1:0] raddr, waddr;
  row_addr_t        rdata, wdata;

  always_ff @(posedge clk) begin
    if (ren) rdata <= mem[raddr];
    if (wen) mem[waddr] <= wdata;
  end

  lt_op_e           op_q;
  row_addr_t        key_q, new_q;
  logic [IDX_W-1:0] cmp_idx;      // index whose word is in rdata during S_SCAN
  logic [IDX_W-1:0] hit_idx;
  logic             hit_q;
  logic [IDX_W-1:0] last_idx;

  assign last_idx  = IDX_W'(count - 1'b1);
  assign req_ready = (state == S_IDLE);

  logic match;
  assign match = (rdata == key_q);

  // SRAM port control
  always_comb begin
    ren   = 1'b0;
    raddr = '0;
    wen   = 1'b0;
    waddr = '0;
    wdata = '0;
    unique case (state)
      S_IDLE: begin
        if (req_valid && req_op == LT_INSERT && count < CNT_W'(ENTRIES)) begin
          wen   = 1'b1;
          waddr = IDX_W'(count);
          wdata = req_key;
        end
      end
      S_PRIME: begin
        ren   = 1'b1;
        raddr = '0;
      end
      S_SCAN: begin
        if (match) begin
          if (op_q == LT_REPLACE) begin
            wen   = 1'b1;
            waddr = cmp_idx;
            wdata = new_q;
          end else if (op_q == LT_REMOVE && cmp_idx != last_idx) begin
            ren   = 1'b1;
            raddr = last_idx;
          end
        end else if (cmp_idx != last_idx) begin
          ren   = 1'b1;
          raddr = cmp_idx + 1'b1;
        end
      end
      S_MOVE: begin
        wen   = 1'b1;
        waddr = hit_idx;
        wdata = rdata;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      count   <= '0;
      op_q    <= LT_LOOKUP;
      key_q   <= '0;
      new_q   <= '0;
      cmp_idx <= '0;
      hit_idx <= '0;
      hit_q   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (req_valid) begin
            op_q    <= req_op;
            key_q   <= req_key;
            new_q   <= req_new;
            cmp_idx <= '0;
            hit_idx <= '0;
            hit_q   <= 1'b0;
            if (req_op == LT_INSERT) begin
              if (count < CNT_W'(ENTRIES)) begin
                hit_q   <= 1'b1;
                hit_idx <= IDX_W'(count);
                count   <= count + 1'b1;
              end
              state <= S_RESP;
            end else if (count == '0) begin
              state <= S_RESP;
            end else begin
              state <= S_PRIME;
            end
          end
        end
        S_PRIME: state <= S_SCAN;
        S_SCAN: begin
          if (match) begin
            hit_q   <= 1'b1;
            hit_idx <= cmp_idx;
            if (op_q == LT_REMOVE) begin
              if (cmp_idx != last_idx) begin
                state <= S_MOVE;
              end else begin
                count <= count - 1'b1;
                state <= S_RESP;
              end
            end else begin
              state <= S_RESP;
            end
          end else if (cmp_idx == last_idx) begin
            state <= S_RESP;
          end else begin
            cmp_idx <= cmp_idx + 1'b1;
          end
        end
        S_MOVE: begin
          count <= count - 1'b1;
          state <= S_RESP;
        end
        S_RESP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign resp_valid = (state == S_RESP);
  assign resp_hit   = hit_q;
  assign resp_idx   = hit_idx;

endmodule
