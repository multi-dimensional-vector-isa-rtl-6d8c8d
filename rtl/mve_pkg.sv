// mve_pkg: types and constants shared by the multi-dimensional vector (MVE)
// in-cache engine.
//
// The engine turns 32 SRAM arrays (256 word-lines x 256 bit-lines each) of a
// private L2 cache into an 8192-lane bit-serial vector unit. Arrays are grouped
// four at a time into control blocks (CBs), each run by one micro-op sequencer.
// This package holds the geometry numbers, the instruction format the core
// sends, the command a CB receives, the micro-op that drives the arrays and the
// port to the regular half of the L2.
//
// Geometry numbers (256x256 arrays, 32 arrays, 4 arrays per CB, 8 CBs, four
// dimensions, 256-element highest dimension, 2 KB instruction queue, 46 MSHRs)
// are the paper's. The binary encodings of instructions, commands and
// micro-ops are this design's own; the paper gives only mnemonics.
package mve_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned ROWS          = 256;   // word-lines per array
  localparam int unsigned COLS          = 256;   // bit-lines (SIMD lanes) per array
  localparam int unsigned N_ARRAYS      = 32;    // compute-capable arrays (4 ways)
  localparam int unsigned ARRAYS_PER_CB = 4;
  localparam int unsigned N_CB          = N_ARRAYS / ARRAYS_PER_CB;   // 8
  localparam int unsigned CB_LANES      = COLS * ARRAYS_PER_CB;      // 1024
  localparam int unsigned TOTAL_LANES   = CB_LANES * N_CB;           // 8192
  localparam int unsigned N_DIMS        = 4;
  localparam int unsigned MAX_HI_LEN    = 256;   // highest-dimension length limit (mask CR size)
  localparam int unsigned MAX_W         = 64;    // widest element (qw)
  localparam int unsigned ROW_W         = $clog2(ROWS);
  localparam int unsigned LANE_W        = $clog2(TOTAL_LANES);      // 13
  localparam int unsigned CBL_W         = $clog2(CB_LANES);         // 10
  localparam int unsigned LEN_W         = LANE_W + 1;               // lengths up to 8192
  localparam int unsigned ADDR_W        = 64;
  localparam int unsigned LINE_BYTES    = 64;
  localparam int unsigned LINE_BITS     = LINE_BYTES * 8;
  localparam int unsigned OFF_W         = $clog2(LINE_BYTES);

  // Scratch rows used by multi-step operations (this design's choice):
  // the top row holds all ones, below it two operand-sized scratch areas.
  localparam logic [ROW_W-1:0] ONES_ROW = ROW_W'(ROWS - 1);

  // ---------------- instruction set ----------------
  typedef enum logic [5:0] {
    // config
    OP_SETDIMC, OP_SETDIML, OP_SETMASK, OP_UNSETMASK, OP_SETWIDTH,
    OP_SETLDSTR, OP_SETSTSTR,
    // move
    OP_CPY,
    // memory
    OP_SLD, OP_RLD, OP_SST, OP_RST,
    // arithmetic
    OP_SETDUP, OP_SHIL, OP_SHIR, OP_ROTIL, OP_ROTIR,
    OP_ADD, OP_SUB, OP_MUL, OP_XOR,
    OP_GT, OP_GE, OP_LT, OP_LE, OP_EQ, OP_NE, OP_MIN, OP_MAX,
    OP_SHVL, OP_SHVR
  } mve_op_e;

  // One instruction as issued by the core (scalar operand already read).
  typedef struct packed {
    mve_op_e         op;
    logic            sgn;     // signed data type (comparisons)
    logic            pred;    // writes predicated by the tag latch
    logic [4:0]      vd;
    logic [4:0]      vs1;
    logic [4:0]      vs2;
    logic [7:0]      modes;   // 2-bit stride mode per dimension, dim i at [2i+1:2i]
    logic [7:0]      imm;     // dimension index or width
    logic [ADDR_W-1:0] rs;    // scalar operand: base address, length, value, amount
  } mve_instr_t;

  function automatic logic is_config(mve_op_e op);
    return op inside {OP_SETDIMC, OP_SETDIML, OP_SETMASK, OP_UNSETMASK,
                      OP_SETWIDTH, OP_SETLDSTR, OP_SETSTSTR};
  endfunction

  function automatic logic is_mem(mve_op_e op);
    return op inside {OP_SLD, OP_RLD, OP_SST, OP_RST};
  endfunction

  function automatic logic is_store(mve_op_e op);
    return op inside {OP_SST, OP_RST};
  endfunction

  // ---------------- control-block command ----------------
  typedef enum logic [4:0] {
    CB_CPY, CB_SETDUP, CB_SHL, CB_SHR, CB_ROTL, CB_ROTR,
    CB_ADD, CB_SUB, CB_MUL, CB_XOR,
    CB_LT, CB_GE, CB_EQ, CB_NE,
    CB_LD_TMU, CB_ST_TMU, CB_MIN, CB_MAX, CB_SHVL, CB_SHVR, CB_TLD
  } cb_op_e;

  typedef struct packed {
    cb_op_e           op;
    logic [ROW_W-1:0] rd;     // first word-line of destination register
    logic [ROW_W-1:0] ra;     // first word-line of source A
    logic [ROW_W-1:0] rb;     // first word-line of source B
    logic [6:0]       width;  // element width n
    logic             sgn;
    logic             pred;
    logic [MAX_W-1:0] value;  // set-duplicate value / shift amount
  } cb_cmd_t;

  // ---------------- micro-op to the arrays ----------------
  // Node driven onto the write drivers (the D_Sel multiplexer of Fig. 1c).
  typedef enum logic [2:0] {
    D_AND, D_NOR, D_NAND, D_OR, D_XOR, D_SUM, D_DIN, D_DCONST
  } dsel_e;

  typedef enum logic [1:0] { C_KEEP, C_ZERO, C_ONE } cinit_e;
  typedef enum logic [1:0] { T_NODE, T_CARRY, T_NCARRY } tsel_e;

  typedef struct packed {
    logic             rd0;    // activate word-line ra (row decoder 0)
    logic [ROW_W-1:0] ra;
    logic             rd1;    // activate word-line rb (row decoder 1)
    logic [ROW_W-1:0] rb;
    logic             wr;     // write the selected node back
    logic [ROW_W-1:0] rw;
    dsel_e            dsel;
    logic             dconst; // constant bit for D_DCONST
    cinit_e           cinit;  // carry-in override for this cycle
    logic             c_en;   // latch carry-out into C
    logic             t_en;   // load tag latch
    tsel_e            tsel;
    logic             pred;   // gate the write by T
  } uop_t;

  // ---------------- port to the regular half of the L2 ----------------
  typedef struct packed {
    logic                     we;
    logic [ADDR_W-1:OFF_W]    line;
    logic [LINE_BITS-1:0]     wdata;
    logic [LINE_BYTES-1:0]    be;
  } mem_req_t;

  typedef struct packed {
    logic                     we;          // acknowledges a write
    logic [ADDR_W-1:OFF_W]    line;
    logic [LINE_BITS-1:0]     rdata;
    logic                     l1_present;  // presence bit of the inclusive L2 tag
  } mem_rsp_t;

  // Element size in bytes as log2, from the width in bits (8/16/32/64).
  function automatic logic [1:0] size_log2(logic [6:0] width);
    unique case (width)
      7'd8:    return 2'd0;
      7'd16:   return 2'd1;
      7'd32:   return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

endpackage
