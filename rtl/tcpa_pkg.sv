// tcpa_pkg: types and constants shared by the loop-control blocks of the
// tightly coupled processor array (TCPA).
//
// The global controller (GC) and the PE control units are run-time
// configurable. Both are written through a plain single-cycle write bus whose
// beat is a packed struct (gc_cfg_t for the GC, pe_cfg_t for the PEs). The
// encodings, field widths and the 32-bit data word are choices of this design;
// the loop-control scheme itself only requires that the parameters named in the
// structs exist as configuration registers.
package tcpa_pkg;

  // Width of a loop index and of an affine left-hand side (two's complement).
  localparam int unsigned IDX_W = 16;
  // Data word of the configuration buses.
  localparam int unsigned CFG_W = 32;

  // ---------------------------------------------------------------- GC ----
  // What a GC configuration beat writes.
  typedef enum logic [2:0] {
    CFG_SCAN_BOUND  = 3'd0,  // scanner: last index of dimension `sub` (data[15:0])
    CFG_SCAN_II     = 3'd1,  // scanner: initiation interval (data[15:0], >= 1)
    CFG_LOW         = 3'd2,  // lower-bound evaluator `index`: bound_cfg layout
    CFG_UP          = 3'd3,  // upper-bound evaluator `index`: bound_cfg layout
    CFG_AFF_CMP     = 3'd4,  // affine evaluator `index`: constant and mode
    CFG_AFF_STRIDE  = 3'd5,  // affine evaluator `index`: stride for step `sub`
    CFG_CONJ_MASK   = 3'd6,  // conjunction `index`: mask word `sub`
    CFG_DISJ_MASK   = 3'd7   // disjunction `index`: mask word `sub`
  } gc_cfg_target_e;

  typedef struct packed {
    logic            we;
    gc_cfg_target_e  target;
    logic [15:0]     index;  // instance number within the target kind
    logic [7:0]      sub;    // dimension or 32-bit word number
    logic [CFG_W-1:0] data;
  } gc_cfg_t;

  // Layout of data for CFG_LOW / CFG_UP / CFG_AFF_CMP:
  //   data[15:0]  constant (signed)
  //   data[23:16] selected dimension (bound evaluators only)
  //   data[24]    mode: 0 = inequality, 1 = equality
  localparam int unsigned CFG_CONST_LSB = 0;
  localparam int unsigned CFG_SEL_LSB   = 16;
  localparam int unsigned CFG_MODE_BIT  = 24;

  typedef enum logic {
    CMP_INEQ = 1'b0,
    CMP_EQ   = 1'b1
  } cmp_mode_e;

  // ---------------------------------------------------------------- PE ----
  typedef enum logic [1:0] {
    PCFG_LATENCY  = 2'd0,  // delay unit latency (data[15:0])
    PCFG_CTRL_MEM = 2'd1,  // control-instruction word at `addr` of FU `fu`
    PCFG_FU_MEM   = 2'd2   // FU-instruction word at `addr` of FU `fu`
  } pe_cfg_target_e;

  typedef struct packed {
    logic            we;
    pe_cfg_target_e  target;
    logic [7:0]      pe;     // row * COLS + column
    logic [3:0]      fu;
    logic [15:0]     addr;
    logic [CFG_W-1:0] data;
  } pe_cfg_t;

  // Control instruction "bt0 bt1 cs wait" (one 32-bit configuration word):
  // when control signal number cs is 1 the next PC is bt0, otherwise bt1; the
  // instruction occupies 1 + wait cycles.
  typedef struct packed {
    logic [7:0] bt0;
    logic [7:0] bt1;
    logic [7:0] cs;
    logic [7:0] wait_cycles;
  } ctrl_instr_t;

  // FU instruction word "op rd rs0 rs1" (18 bits, one BRAM18 word).
  typedef struct packed {
    logic [5:0] op;
    logic [3:0] rd;
    logic [3:0] rs0;
    logic [3:0] rs1;
  } fu_instr_t;

  // Which delay implementation a PE uses.
  typedef enum logic {
    DELAY_SHIFT_REG = 1'b0,
    DELAY_TIMESTAMP = 1'b1
  } delay_kind_e;

endpackage
