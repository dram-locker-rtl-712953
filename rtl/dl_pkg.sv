// dl_pkg: types and constants shared by the DRAM-Locker blocks.
//
// Address layout. A DRAM row is named by one global row address of ROW_W bits:
// {bank[3:0], row[17:0]}. Sixteen banks follow the 32GB 16-bank DDR4 system the
// design is sized for; 18 row bits (8KB rows, 2GB per bank) are this design's
// assumption. Columns are 10 bits and one column beat carries 64 bits (assumed).
//
// Micro-instruction format (16 bits, field widths and opcodes as published for
// the DRAM-Locker ISA; the bit positions are this design's choice, MSB first in
// the drawn order):
//   [15:14] OP    01 = AAP (row copy), 10 = bnez, 11 = done, 00 = no-op
//   [13:9]  dst   micro-register holding the destination row (AAP only)
//   [8:4]   src   micro-register holding the source row      (AAP only)
//   [3:0]   unused
package dl_pkg;

  localparam int unsigned BANK_W  = 4;
  localparam int unsigned ROWID_W = 18;
  localparam int unsigned ROW_W   = BANK_W + ROWID_W;
  localparam int unsigned COL_W   = 10;
  localparam int unsigned DATA_W  = 64;

  localparam int unsigned INSTR_W    = 16;
  localparam int unsigned UREG_IDX_W = 5;
  localparam int unsigned NUM_UREGS  = 1 << UREG_IDX_W;
  localparam int unsigned LOOP_W     = 8;

  typedef logic [ROW_W-1:0]  row_addr_t;
  typedef logic [COL_W-1:0]  col_addr_t;
  typedef logic [DATA_W-1:0] data_t;

  typedef enum logic [1:0] {
    OP_NOP  = 2'b00,
    OP_AAP  = 2'b01,
    OP_BNEZ = 2'b10,
    OP_DONE = 2'b11
  } opcode_e;

  typedef struct packed {
    opcode_e                op;
    logic [UREG_IDX_W-1:0]  dst;
    logic [UREG_IDX_W-1:0]  src;
    logic [3:0]             unused;
  } instr_t;

  // DRAM command stream
  typedef enum logic [1:0] {
    CMD_ACT = 2'd0,
    CMD_PRE = 2'd1,
    CMD_RD  = 2'd2,
    CMD_WR  = 2'd3
  } dram_op_e;

  typedef struct packed {
    dram_op_e  op;
    row_addr_t row;    // bank and row; RD, WR and PRE use its bank
    col_addr_t col;
    data_t     wdata;
  } dram_cmd_t;

  // Entries of the Sequence (instruction queue)
  typedef enum logic [2:0] {
    SEQ_READ   = 3'd0,
    SEQ_WRITE  = 3'd1,
    SEQ_SWAP   = 3'd2,   // row = Locked Row, row2 = Unlocked (free) Row
    SEQ_LOCK   = 3'd3,   // add row to the lock-table
    SEQ_UNLOCK = 3'd4    // remove row from the lock-table
  } seq_kind_e;

  typedef struct packed {
    seq_kind_e kind;
    row_addr_t row;
    row_addr_t row2;
    col_addr_t col;
    data_t     wdata;
  } seq_entry_t;

  typedef enum logic [1:0] {
    ST_OK         = 2'd0,
    ST_BLOCKED    = 2'd1,   // R/W hit a locked row and was skipped
    ST_NOT_LOCKED = 2'd2,   // SWAP or UNLOCK named a row not in the lock-table
    ST_FULL       = 2'd3    // LOCK refused, lock-table full
  } status_e;

  typedef struct packed {
    seq_kind_e kind;
    status_e   status;
    data_t     rdata;
  } resp_t;

  // Lock-table operations
  typedef enum logic [1:0] {
    LT_LOOKUP  = 2'd0,
    LT_INSERT  = 2'd1,
    LT_REMOVE  = 2'd2,
    LT_REPLACE = 2'd3
  } lt_op_e;

  // Bank field of a global row address
  function automatic logic [BANK_W-1:0] bank_of(row_addr_t r);
    return r[ROW_W-1 -: BANK_W];
  endfunction

  function automatic logic [INSTR_W-1:0] mk_aap(logic [UREG_IDX_W-1:0] dst,
                                                logic [UREG_IDX_W-1:0] src);
    instr_t i;
    i.op = OP_AAP; i.dst = dst; i.src = src; i.unused = '0;
    return i;
  endfunction

endpackage
