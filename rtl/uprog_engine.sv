// uprog_engine: executes DRAM-Locker micro-programs, which is how a SWAP reaches
// the DRAM as a series of in-DRAM row copies.
//
// Instructions are 16 bits (see dl_pkg): AAP copies the row named by micro-
// register src into the row named by micro-register dst, bnez closes a loop and
// done ends the program. AAP is carried out RowClone style, as three DRAM
// commands: ACT src, ACT dst (no precharge in between, so the sense amplifiers
// still holding the source row overwrite the destination row), then PRE. The
// instruction set (widths, opcodes 01/10/11, 32 micro-registers addressed by the
// 5-bit fields) follows the published ISA, and so does the default SWAP program
// loaded at reset, which is the three-step copy through a Buffer Row:
//   0: AAP u2 <- u0   Locked Row   -> Buffer Row
//   1: AAP u0 <- u1   Unlocked Row -> Locked Row
//   2: AAP u1 <- u2   Buffer Row   -> Unlocked Row
//   3: done
// The register numbering, the bit positions of the fields and the meaning of
// bnez's hidden operands are this design's choices: bnez jumps to loop_target
// and decrements loop_cnt while loop_cnt is non-zero, otherwise it falls through.
// loop_cnt counts down and is not restored when the program ends, so software
// reloads it before every run that is meant to loop.
// Opcode 00 is not defined by the ISA and is executed as a no-op.
//
// Interface. imem_*, ureg_* and loop_* are write ports used while the engine is
// idle. start (one cycle, while busy is low) runs the program from start_pc.
// Commands leave on cmd_valid/cmd/cmd_ready; cmd is held stable while
// cmd_valid is high and cmd_ready low. done pulses for one cycle when the done
// instruction is executed, and busy falls in the same cycle.
// The engine only issues ACT and PRE, so the col and wdata fields of cmd are
// always zero; they exist because the command type is shared with R/W traffic.
// Timing: with cmd_ready held high an AAP takes 3 cycles, bnez, done and no-op
// one cycle each, so the default SWAP program takes 10 cycles from start to done.
module uprog_engine
  import dl_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 16,
  parameter int unsigned PC_W       = (IMEM_DEPTH > 1) ? $clog2(IMEM_DEPTH) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // program and register set-up
  input  logic                  imem_we,
  input  logic [PC_W-1:0]       imem_addr,
  input  logic [INSTR_W-1:0]    imem_wdata,
  input  logic                  ureg_we,
  input  logic [UREG_IDX_W-1:0] ureg_idx,
  input  row_addr_t             ureg_wdata,
  input  logic                  loop_we,
  input  logic [LOOP_W-1:0]     loop_cnt_in,
  input  logic [PC_W-1:0]       loop_target_in,
  // control
  input  logic                  start,
  input  logic [PC_W-1:0]       start_pc,
  output logic                  busy,
  output logic                  done,
  // DRAM command stream
  output logic                  cmd_valid,
  input  logic                  cmd_ready,
  output dram_cmd_t             cmd,
  output logic [31:0]           aap_count
);

  typedef enum logic [2:0] {S_IDLE, S_EXEC, S_ACT_DST, S_PRE} state_e;
  state_e state;

  logic [INSTR_W-1:0]  imem [IMEM_DEPTH];
  row_addr_t           ureg [NUM_UREGS];
  logic [PC_W-1:0]     pc;
  logic [LOOP_W-1:0]   loop_cnt;
  logic [PC_W-1:0]     loop_target;
  instr_t              ir;       // instruction being executed

  instr_t cur;
  assign cur = instr_t'(imem[pc]);

  // instruction memory: default SWAP program at reset
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < IMEM_DEPTH; i++) begin
        imem[i] <= {OP_DONE, 14'd0};
      end
      imem[0 % IMEM_DEPTH] <= mk_aap(5'd2, 5'd0);
      imem[1 % IMEM_DEPTH] <= mk_aap(5'd0, 5'd1);
      imem[2 % IMEM_DEPTH] <= mk_aap(5'd1, 5'd2);
    end else if (imem_we && state == S_IDLE) begin
      imem[imem_addr] <= imem_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (ureg_we && state == S_IDLE) ureg[ureg_idx] <= ureg_wdata;
  end

  // command output
  always_comb begin
    cmd       = '0;
    cmd_valid = 1'b0;
    unique case (state)
      S_EXEC: begin
        if (cur.op == OP_AAP) begin
          cmd_valid = 1'b1;
          cmd.op    = CMD_ACT;
          cmd.row   = ureg[cur.src];
        end
      end
      S_ACT_DST: begin
        cmd_valid = 1'b1;
        cmd.op    = CMD_ACT;
        cmd.row   = ureg[ir.dst];
      end
      S_PRE: begin
        cmd_valid = 1'b1;
        cmd.op    = CMD_PRE;
        cmd.row   = ureg[ir.dst];
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_EXEC) && (cur.op == OP_DONE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pc          <= '0;
      ir          <= '0;
      loop_cnt    <= '0;
      loop_target <= '0;
      aap_count   <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (loop_we) begin
            loop_cnt    <= loop_cnt_in;
            loop_target <= loop_target_in;
          end
          if (start) begin
            pc    <= start_pc;
            state <= S_EXEC;
          end
        end
        S_EXEC: begin
          unique case (cur.op)
            OP_AAP: begin
              if (cmd_ready) begin
                ir    <= cur;
                state <= S_ACT_DST;
              end
            end
            OP_BNEZ: begin
              if (loop_cnt != '0) begin
                loop_cnt <= loop_cnt - 1'b1;
                pc       <= loop_target;
              end else begin
                pc <= pc + 1'b1;
              end
            end
            OP_DONE: state <= S_IDLE;
            default: pc <= pc + 1'b1;   // OP_NOP
          endcase
        end
        S_ACT_DST: if (cmd_ready) state <= S_PRE;
        S_PRE: begin
          if (cmd_ready) begin
            aap_count <= aap_count + 1'b1;
            pc        <= pc + 1'b1;
            state     <= S_EXEC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A command offered and not taken must stay put.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));

endmodule
