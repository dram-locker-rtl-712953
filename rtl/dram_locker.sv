// dram_locker: top level of the DRAM-Locker, the memory-controller extension
// that keeps RowHammer attackers from singling out chosen DRAM rows.
//
// Rows next to the data to be protected (for instance DNN weights or page
// tables) are written into a lock-table. Every R/W instruction is looked up there
// first: one that names a locked row is skipped, so hammering it achieves
// nothing. When the program really needs a locked row, a SWAP exchanges the
// Locked Row with a free Unlocked Row by three in-DRAM row copies through a
// Buffer Row. Software then uses the Unlocked Row's address. After 1k further
// R/W instructions the lock-table entry is moved to the address the data now
// lives at, which locks the data again.
//
// Blocks: sequence_queue (the Sequence of pending instructions), lock_table
// (SRAM of locked addresses), uprog_engine (runs the SWAP micro-program as
// RowClone AAP commands) and relock_unit (the 1k R/W re-lock window). The
// controller state machine is in this module. It handles one Sequence entry at a
// time, in order:
//   READ/WRITE  lock-table LOOKUP; hit -> status BLOCKED, nothing reaches DRAM;
//               miss -> ACT, RD/WR, (wait for read data), PRE -> status OK.
//   SWAP        LOOKUP of the Locked Row; miss -> NOT_LOCKED; hit -> micro-
//               registers u0 = Locked Row, u1 = Unlocked Row, u2 = Buffer Row,
//               run the program at address 0, record (Locked, Unlocked) for
//               re-lock -> OK. If the re-lock queue is full, the oldest
//               pending re-lock is carried out early to make room.
//   LOCK        lock-table INSERT -> OK, or FULL.
//   UNLOCK      lock-table REMOVE -> OK, or NOT_LOCKED.
// A re-lock that is due is carried out (lock-table REPLACE) before the next
// Sequence entry is taken. Every READ/WRITE taken from the Sequence, executed or
// skipped, counts towards the re-lock window.
// The lock-table check, the three-copy SWAP, the Buffer Row and the 1k re-lock
// follow the published design. The closed-page command order, the entry and
// status encodings, the arbitration and the handshakes are this design's own.
//
// RowClone copies only within one sub-array, so the Buffer Row must share the
// sub-array of the rows it passes data between. Here every bank reserves the
// row buffer_row_id as its Buffer Row, and the SWAP uses the one in the Locked
// Row's bank. Software must pick the Unlocked Row in the same sub-array as the
// Locked Row; this is not checked.
//
// Interface. Instructions enter on seq_valid/seq_ready/seq_entry; each one is
// answered, in order, by a one-cycle resp_valid with resp (kind, status, read
// data). cfg_* write the micro-program, the micro-registers and the loop
// registers; they are accepted while cfg_ready is high. DRAM commands leave on
// dram_cmd_valid/dram_cmd_ready/dram_cmd (held stable until taken); read data
// returns on dram_rd_valid/dram_rd_data at any later cycle. DRAM timing is left
// to the command receiver, which delays dram_cmd_ready as it needs.
// Timing with the DRAM always ready and k locked rows ahead of the match in the
// table: an executed write takes about k+9 cycles, a SWAP about k+19.
module dram_locker
  import dl_pkg::*;
#(
  parameter int unsigned LT_ENTRIES      = 14336,
  parameter int unsigned SEQ_DEPTH       = 16,
  parameter int unsigned RELOCK_INTERVAL = 1000,
  parameter int unsigned RELOCK_DEPTH    = 8,
  parameter int unsigned IMEM_DEPTH      = 16,
  parameter int unsigned PC_W            = (IMEM_DEPTH > 1) ? $clog2(IMEM_DEPTH) : 1,
  parameter int unsigned LT_CNT_W        = $clog2(LT_ENTRIES + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // Sequence input and responses
  input  logic                  seq_valid,
  output logic                  seq_ready,
  input  seq_entry_t            seq_entry,
  output logic                  resp_valid,
  output resp_t                 resp,
  // configuration
  input  logic [ROWID_W-1:0]    buffer_row_id,
  output logic                  cfg_ready,
  input  logic                  cfg_imem_we,
  input  logic [PC_W-1:0]       cfg_imem_addr,
  input  logic [INSTR_W-1:0]    cfg_imem_wdata,
  input  logic                  cfg_ureg_we,
  input  logic [UREG_IDX_W-1:0] cfg_ureg_idx,
  input  row_addr_t             cfg_ureg_wdata,
  input  logic                  cfg_loop_we,
  input  logic [LOOP_W-1:0]     cfg_loop_cnt,
  input  logic [PC_W-1:0]       cfg_loop_target,
  // DRAM
  output logic                  dram_cmd_valid,
  input  logic                  dram_cmd_ready,
  output dram_cmd_t             dram_cmd,
  input  logic                  dram_rd_valid,
  input  data_t                 dram_rd_data,
  // status
  output logic [LT_CNT_W-1:0]   lt_count,
  output logic [$clog2(SEQ_DEPTH+1)-1:0]    seq_level,
  output logic [$clog2(RELOCK_DEPTH+1)-1:0] relock_pending,
  output logic [31:0]           stat_rw_done,
  output logic [31:0]           stat_rw_blocked,
  output logic [31:0]           stat_swaps,
  output logic [31:0]           stat_relocks,
  output logic [31:0]           stat_early_relocks,
  output logic [31:0]           stat_row_copies
);

  localparam int unsigned LT_IDX_W = (LT_ENTRIES > 1) ? $clog2(LT_ENTRIES) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LT_REQ, S_LT_WAIT,
    S_ACT, S_RW, S_RDWAIT, S_PRE,
    S_SW_U0, S_SW_U1, S_SW_U2, S_SW_START, S_SW_WAIT
  } state_e;

  state_e     state;
  seq_entry_t cur;           // instruction being handled
  logic       relocking;     // the lock-table operation in flight is a re-lock
  logic       early;         // ... forced early by a full re-lock queue
  data_t      rdata_q;

  // ---------------- Sequence ----------------
  logic       sq_pop_valid, sq_pop_ready;
  seq_entry_t sq_head;

  sequence_queue #(.DEPTH(SEQ_DEPTH)) u_seq (
    .clk, .rst_n,
    .push_valid (seq_valid),
    .push_ready (seq_ready),
    .push_data  (seq_entry),
    .pop_valid  (sq_pop_valid),
    .pop_ready  (sq_pop_ready),
    .pop_data   (sq_head),
    .level      (seq_level)
  );

  // ---------------- re-lock scheduling ----------------
  logic      rl_rec_valid, rl_rec_ready, rl_valid, rl_ready, rw_pulse, rl_force;
  row_addr_t rl_old, rl_new;

  relock_unit #(.RELOCK_INTERVAL(RELOCK_INTERVAL), .DEPTH(RELOCK_DEPTH)) u_relock (
    .clk, .rst_n,
    .rw_pulse     (rw_pulse),
    .force_due    (rl_force),
    .rec_valid    (rl_rec_valid),
    .rec_ready    (rl_rec_ready),
    .rec_old      (cur.row),
    .rec_new      (cur.row2),
    .relock_valid (rl_valid),
    .relock_ready (rl_ready),
    .relock_old   (rl_old),
    .relock_new   (rl_new),
    .pending      (relock_pending)
  );

  // ---------------- lock-table ----------------
  logic                lt_req_valid, lt_req_ready, lt_resp_valid, lt_resp_hit;
  lt_op_e              lt_op;
  row_addr_t           lt_key, lt_new;
  logic [LT_IDX_W-1:0] lt_resp_idx;

  lock_table #(.ENTRIES(LT_ENTRIES)) u_lt (
    .clk, .rst_n,
    .req_valid  (lt_req_valid),
    .req_ready  (lt_req_ready),
    .req_op     (lt_op),
    .req_key    (lt_key),
    .req_new    (lt_new),
    .resp_valid (lt_resp_valid),
    .resp_hit   (lt_resp_hit),
    .resp_idx   (lt_resp_idx),
    .count      (lt_count)
  );

  // ---------------- micro-program engine ----------------
  logic                  ue_ureg_we, ue_start, ue_busy, ue_done;
  logic [UREG_IDX_W-1:0] ue_ureg_idx;
  row_addr_t             ue_ureg_wdata;
  logic                  ue_cmd_valid, ue_cmd_ready;
  dram_cmd_t             ue_cmd;

  uprog_engine #(.IMEM_DEPTH(IMEM_DEPTH)) u_engine (
    .clk, .rst_n,
    .imem_we        (cfg_imem_we && cfg_ready),
    .imem_addr      (cfg_imem_addr),
    .imem_wdata     (cfg_imem_wdata),
    .ureg_we        (ue_ureg_we),
    .ureg_idx       (ue_ureg_idx),
    .ureg_wdata     (ue_ureg_wdata),
    .loop_we        (cfg_loop_we && cfg_ready),
    .loop_cnt_in    (cfg_loop_cnt),
    .loop_target_in (cfg_loop_target),
    .start          (ue_start),
    .start_pc       ('0),
    .busy           (ue_busy),
    .done           (ue_done),
    .cmd_valid      (ue_cmd_valid),
    .cmd_ready      (ue_cmd_ready),
    .cmd            (ue_cmd),
    .aap_count      (stat_row_copies)
  );

  assign cfg_ready = (state == S_IDLE) && !ue_busy;

  // micro-register writes: the controller during SWAP set-up, software otherwise
  always_comb begin
    ue_ureg_we    = cfg_ureg_we && cfg_ready;
    ue_ureg_idx   = cfg_ureg_idx;
    ue_ureg_wdata = cfg_ureg_wdata;
    unique case (state)
      S_SW_U0: begin ue_ureg_we = 1'b1; ue_ureg_idx = 5'd0; ue_ureg_wdata = cur.row;    end
      S_SW_U1: begin ue_ureg_we = 1'b1; ue_ureg_idx = 5'd1; ue_ureg_wdata = cur.row2;   end
      S_SW_U2: begin ue_ureg_we = 1'b1; ue_ureg_idx = 5'd2; ue_ureg_wdata = {bank_of(cur.row), buffer_row_id}; end
      default: ;
    endcase
  end
  assign ue_start = (state == S_SW_START);

  // ---------------- Sequence pop and lock-table requests ----------------
  logic take_relock, take_seq;
  assign take_relock  = (state == S_IDLE) && rl_valid;
  assign take_seq     = (state == S_IDLE) && !rl_valid && sq_pop_valid &&
                        (sq_head.kind != SEQ_SWAP || rl_rec_ready);
  assign sq_pop_ready = take_seq;
  // SWAP at the head with the re-lock queue full: re-lock the oldest one early
  assign rl_force     = (state == S_IDLE) && sq_pop_valid && sq_head.kind == SEQ_SWAP &&
                        !rl_rec_ready;
  assign rw_pulse     = take_seq && (sq_head.kind == SEQ_READ || sq_head.kind == SEQ_WRITE);

  assign lt_req_valid = (state == S_LT_REQ);
  assign lt_key       = relocking ? rl_old : cur.row;
  assign lt_new       = rl_new;
  always_comb begin
    if (relocking) lt_op = LT_REPLACE;
    else begin
      unique case (cur.kind)
        SEQ_LOCK:   lt_op = LT_INSERT;
        SEQ_UNLOCK: lt_op = LT_REMOVE;
        default:    lt_op = LT_LOOKUP;
      endcase
    end
  end
  assign rl_ready     = (state == S_LT_WAIT) && lt_resp_valid && relocking;
  assign rl_rec_valid = (state == S_SW_WAIT) && ue_done;

  // ---------------- DRAM command mux ----------------
  always_comb begin
    dram_cmd       = '0;
    dram_cmd_valid = 1'b0;
    ue_cmd_ready   = 1'b0;
    unique case (state)
      S_ACT: begin
        dram_cmd_valid = 1'b1;
        dram_cmd.op    = CMD_ACT;
        dram_cmd.row   = cur.row;
      end
      S_RW: begin
        dram_cmd_valid = 1'b1;
        dram_cmd.op    = (cur.kind == SEQ_WRITE) ? CMD_WR : CMD_RD;
        dram_cmd.row   = cur.row;
        dram_cmd.col   = cur.col;
        dram_cmd.wdata = cur.wdata;
      end
      S_PRE: begin
        dram_cmd_valid = 1'b1;
        dram_cmd.op    = CMD_PRE;
        dram_cmd.row   = cur.row;
      end
      S_SW_WAIT: begin
        dram_cmd_valid = ue_cmd_valid;
        dram_cmd       = ue_cmd;
        ue_cmd_ready   = dram_cmd_ready;
      end
      default: ;
    endcase
  end

  // ---------------- controller ----------------
  task automatic respond(status_e st);
    resp_valid   <= 1'b1;
    resp.kind    <= cur.kind;
    resp.status  <= st;
    resp.rdata   <= (cur.kind == SEQ_READ && st == ST_OK) ? rdata_q : '0;
  endtask

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      cur             <= '0;
      relocking       <= 1'b0;
      early           <= 1'b0;
      stat_early_relocks <= '0;
      rdata_q         <= '0;
      resp_valid      <= 1'b0;
      resp            <= '0;
      stat_rw_done    <= '0;
      stat_rw_blocked <= '0;
      stat_swaps      <= '0;
      stat_relocks    <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (take_relock) begin
            relocking <= 1'b1;
            early     <= rl_force;
            state     <= S_LT_REQ;
          end else if (take_seq) begin
            relocking <= 1'b0;
            cur       <= sq_head;
            state     <= S_LT_REQ;
          end
        end
        S_LT_REQ: if (lt_req_ready) state <= S_LT_WAIT;
        S_LT_WAIT: begin
          if (lt_resp_valid) begin
            if (relocking) begin
              if (lt_resp_hit) stat_relocks <= stat_relocks + 1'b1;
              if (early) stat_early_relocks <= stat_early_relocks + 1'b1;
              relocking <= 1'b0;
              state     <= S_IDLE;
            end else begin
              unique case (cur.kind)
                SEQ_READ, SEQ_WRITE: begin
                  if (lt_resp_hit) begin
                    stat_rw_blocked <= stat_rw_blocked + 1'b1;
                    respond(ST_BLOCKED);
                    state <= S_IDLE;
                  end else begin
                    state <= S_ACT;
                  end
                end
                SEQ_SWAP: begin
                  if (lt_resp_hit) state <= S_SW_U0;
                  else begin
                    respond(ST_NOT_LOCKED);
                    state <= S_IDLE;
                  end
                end
                SEQ_LOCK: begin
                  respond(lt_resp_hit ? ST_OK : ST_FULL);
                  state <= S_IDLE;
                end
                default: begin   // SEQ_UNLOCK
                  respond(lt_resp_hit ? ST_OK : ST_NOT_LOCKED);
                  state <= S_IDLE;
                end
              endcase
            end
          end
        end
        S_ACT: if (dram_cmd_ready) state <= S_RW;
        S_RW: begin
          if (dram_cmd_ready) state <= (cur.kind == SEQ_READ) ? S_RDWAIT : S_PRE;
        end
        S_RDWAIT: begin
          if (dram_rd_valid) begin
            rdata_q <= dram_rd_data;
            state   <= S_PRE;
          end
        end
        S_PRE: begin
          if (dram_cmd_ready) begin
            stat_rw_done <= stat_rw_done + 1'b1;
            respond(ST_OK);
            state <= S_IDLE;
          end
        end
        S_SW_U0:    state <= S_SW_U1;
        S_SW_U1:    state <= S_SW_U2;
        S_SW_U2:    state <= S_SW_START;
        S_SW_START: state <= S_SW_WAIT;
        S_SW_WAIT: begin
          if (ue_done) begin
            stat_swaps <= stat_swaps + 1'b1;
            respond(ST_OK);
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A SWAP is only taken when its re-lock record has room.
  a_rec_room: assert property (@(posedge clk) disable iff (!rst_n)
    rl_rec_valid |-> rl_rec_ready);
  // A DRAM command offered and not taken must stay put.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dram_cmd_valid && !dram_cmd_ready |=> dram_cmd_valid && $stable(dram_cmd));

endmodule
