// espim_pkg: types and constants shared by the ESPIM channel.
//
// One ESPIM channel is a DRAM channel whose banks each hold a small datapath
// for sparse matrix-vector products. The host drives it with DRAM-like
// commands (LOAD-GB, ALL-ACT, LOAD-IDX, COMP-NoBR, COMP-BR,
// RDRES) plus the ordinary PRE and WR and a mode-set command.
//
// Numbers that come from the paper: 16 banks, 32768 rows of 32 columns of
// 256 bits, 16 bfloat16 elements per column and per broadcast slice, 11 sparse
// execution units per bank (16 MAC lanes in dense mode), 8-entry FIFOs, 7-bit
// metadata per matrix cell, tCCD = 4, tRCD = 10, tRP = 10.
// Choices of this design: the command encoding, the order of the metadata
// bits inside the 7-bit field beyond "start is the 6th, select the 7th",
// fp32 accumulation, and the index-only column packing (3 fields per unit).
package espim_pkg;

  // ---- geometry -------------------------------------------------------
  localparam int unsigned COL_BITS    = 256;  // column I/O width
  localparam int unsigned SLICE       = 16;   // bfloat16 elements per slice
  localparam int unsigned N_LANES     = 16;   // MAC lanes per bank (dense)
  localparam int unsigned N_SPARSE    = 11;   // execution units per bank (sparse)
  localparam int unsigned META_BITS   = 7;    // metadata bits per sparse cell
  localparam int unsigned META_BASE   = N_SPARSE * 16;  // metadata start bit
  localparam int unsigned IDX_SLOTS   = 3;    // metadata fields per unit in an index-only column
  localparam int unsigned ROW_W       = 15;   // 32768 rows
  localparam int unsigned COLADDR_W   = 5;    // 32 columns per row
  localparam int unsigned BANK_W      = 4;    // up to 16 banks
  localparam int unsigned T_CCD       = 4;    // cycles per column command

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // Per-cell metadata, 7 bits: {select, start, valid, index}.
  typedef struct packed {
    logic       sel;    // 7th bit: which of the two output buffers
    logic       start;  // 6th bit: first entry of a new vector slice
    logic       valid;  // 5th bit: index matches an element of its slice
    logic [3:0] idx;    // position within the 16-element slice
  } meta_t;

  // eFIFO entry: extracted vector element plus the select bit of its index.
  typedef struct packed {
    logic  sel;
    bf16_t elem;
  } elem_t;

  // Host command opcodes.
  typedef enum logic [3:0] {
    CMD_NOP       = 4'd0,
    CMD_ACT       = 4'd1,   // ALL-ACT: activate `row` in every bank
    CMD_PRE       = 4'd2,   // all-bank precharge
    CMD_WR        = 4'd3,   // ordinary column write to one bank
    CMD_LOAD_GB   = 4'd4,   // LOAD-GB#: write one global-buffer chunk
    CMD_LOAD_IDX  = 4'd5,   // LOAD-IDX#: index-only column read
    CMD_COMP_NOBR = 4'd6,   // COMP-NoBR#: compute, extract from the latched slice
    CMD_COMP_BR   = 4'd7,   // COMP-BR#: compute, extract from the next broadcast
    CMD_RDRES     = 4'd8,   // RDRES#: read (and clear) one bank's results
    CMD_MODE      = 4'd9    // set dense (1) or sparse (0) mode
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e                op;
    logic [BANK_W-1:0]      bank;
    logic [ROW_W-1:0]       row;
    logic [COLADDR_W-1:0]   col;    // column, or global-buffer chunk
    logic                   dense;  // for CMD_MODE
    logic [COL_BITS-1:0]    data;   // for CMD_WR and CMD_LOAD_GB
  } pim_cmd_t;

  // Per-cycle operation seen by the bank datapaths.
  typedef enum logic [1:0] {
    BOP_IDLE      = 2'd0,
    BOP_LOAD_IDX  = 2'd1,
    BOP_COMP_NOBR = 2'd2,
    BOP_COMP_BR   = 2'd3
  } bank_op_e;

  // Placeholder metadata: never enters an iFIFO.
  localparam meta_t META_PLACEHOLDER = '{sel: 1'b0, start: 1'b0, valid: 1'b0, idx: 4'd0};

endpackage
