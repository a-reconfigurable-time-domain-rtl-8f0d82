// tdimc_pkg: types and constants shared by the time-domain FeFET in-memory-computing macro.
//
// The macro stores binary weights in a C-AND array of two-FeFET CAM cells and computes by
// delaying a pulse through a chain of delay elements (one per column); a flash TDC digitises the
// total delay. This package holds the encodings that the digital blocks exchange:
//   * mode_e     - compute modes named in the paper (XOR-MAC, AND-MAC, in-memory AND / OR, full
//                  adder) plus the single-cell calibration read of the MLS calibration scheme;
//   * line_op_e  - what the line decoders set up: nothing, a column program pulse, a cell erase,
//                  a bulk-assisted partial erase (multilevel state), or a compute/read;
//   * wl_lvl_e, bl_lvl_e, bul_lvl_e - which rail each array line is switched to;
//   * fe_sel_e   - which FeFET of a cell (main on WL, complementary on WL-bar) a write addresses;
//   * cmd_e      - commands of the operation sequencer.
// The rail voltages (4 V program, -4 V erase, -2 V bulk inhibit, BuL swept -2..0 V for partial
// erase) are the paper's; the binary encodings are this design's own.
//
// V_PGM, V_ERS and V_INH are read by the array model; linting the package on its own reports
// them as unused.
package tdimc_pkg;

  typedef enum logic [2:0] {
    MODE_XOR_MAC   = 3'd0,
    MODE_AND_MAC   = 3'd1,
    MODE_LOGIC_AND = 3'd2,
    MODE_LOGIC_OR  = 3'd3,
    MODE_FULL_ADD  = 3'd4,
    MODE_CAL_READ  = 3'd5
  } mode_e;

  typedef enum logic [2:0] {
    LOP_IDLE    = 3'd0,
    LOP_PROGRAM = 3'd1,
    LOP_ERASE   = 3'd2,
    LOP_MLS     = 3'd3,
    LOP_COMPUTE = 3'd4
  } line_op_e;

  // Word-line rails: ground, read/compute level V_H, +4 V program, -4 V erase.
  typedef enum logic [1:0] {
    WL_GND  = 2'd0,
    WL_VH   = 2'd1,
    WL_VPGM = 2'd2,
    WL_VERS = 2'd3
  } wl_lvl_e;

  // Bit lines are either grounded (selected row) or left floating (Hi-Z).
  typedef enum logic {
    BL_GND = 1'b0,
    BL_HIZ = 1'b1
  } bl_lvl_e;

  // Bulk lines: 0 V, -2 V write inhibit, or the partial-erase level set by a BuL code.
  typedef enum logic [1:0] {
    BUL_GND = 2'd0,
    BUL_INH = 2'd1,
    BUL_MLS = 2'd2
  } bul_lvl_e;

  typedef enum logic {
    FE_MAIN = 1'b0,
    FE_COMP = 1'b1
  } fe_sel_e;

  typedef enum logic [1:0] {
    CMD_NONE      = 2'd0,
    CMD_WRITE_COL = 2'd1,
    CMD_COMPUTE   = 2'd2
  } cmd_e;

  // Array bias voltages (V), from the paper's write scheme.
  localparam real V_PGM = 4.0;
  localparam real V_ERS = -4.0;
  localparam real V_INH = -2.0;

endpackage
