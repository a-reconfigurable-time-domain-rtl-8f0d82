// line_decoder: row and column decoders of the FeFET CAM array.
//
// Given the operation the sequencer wants (line_op_e), the compute mode and the selected row,
// column, FeFET and activations, it chooses the rail of every word line (WL, WL-bar per column),
// bit line (BL per row) and bulk line (BuL per row). It is purely combinational; the array model
// (or, in silicon, the line switches) turns the selections into voltages.
//
// Bias tables (all from the paper's write and compute schemes):
//   program   : WL (or WL-bar) of the selected column at +4 V, every other WL 0 V, all BL and BuL
//               0 V - the whole column goes to LVT at once.
//   erase     : selected WL (or WL-bar) at -4 V, BuL of the selected row 0 V, BuL of every other
//               row -2 V (write inhibit), all BL 0 V.
//   MLS       : as erase, but the selected row's BuL sits at the partial-erase level (-2..0 V).
//   compute   : selected row BL grounded, others Hi-Z, BuL 0 V, word lines by mode:
//                 XOR-MAC   WL = X ? V_H : 0, WL-bar = X ? 0 : V_H
//                 AND-MAC   WL = X ? V_H : 0, WL-bar = 0
//                 logic AND/OR  WL = selected column ? V_H : 0, WL-bar = 0
//                 full adder    WL = (selected column and X) ? V_H : 0, WL-bar = 0
//                 calibration   WL = WL-bar = V_H on the selected column only
// This design's own choices: the idle state (WL 0 V, BL Hi-Z, BuL 0 V), 0 V on every BuL during
// compute, and the full-adder word-line rule read from "similar to AND-MAC with the WLs of
// unselected cells grounded".
module line_decoder
  import tdimc_pkg::*;
#(
  parameter int N_ROWS = 3,
  parameter int N_COLS = 3,
  localparam int RW = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int CW = (N_COLS > 1) ? $clog2(N_COLS) : 1
) (
  input  line_op_e         op,
  input  mode_e            mode,
  input  logic [RW-1:0]    row,
  input  logic [CW-1:0]    col,
  input  fe_sel_e          fe,
  input  logic [N_COLS-1:0] x,
  input  logic [N_COLS-1:0] col_mask,
  output wl_lvl_e          wl_lvl  [N_COLS],
  output wl_lvl_e          wlb_lvl [N_COLS],
  output bl_lvl_e          bl_lvl  [N_ROWS],
  output bul_lvl_e         bul_lvl [N_ROWS]
);

  always_comb begin
    for (int c = 0; c < N_COLS; c++) begin
      wl_lvl[c]  = WL_GND;
      wlb_lvl[c] = WL_GND;
    end
    for (int r = 0; r < N_ROWS; r++) begin
      bl_lvl[r]  = BL_HIZ;
      bul_lvl[r] = BUL_GND;
    end

    unique case (op)
      LOP_PROGRAM: begin
        for (int r = 0; r < N_ROWS; r++) bl_lvl[r] = BL_GND;
        for (int c = 0; c < N_COLS; c++)
          if (CW'(c) == col) begin
            if (fe == FE_MAIN) wl_lvl[c] = WL_VPGM;
            else               wlb_lvl[c] = WL_VPGM;
          end
      end
      LOP_ERASE, LOP_MLS: begin
        for (int r = 0; r < N_ROWS; r++) begin
          bl_lvl[r] = BL_GND;
          if (RW'(r) == row) bul_lvl[r] = (op == LOP_MLS) ? BUL_MLS : BUL_GND;
          else               bul_lvl[r] = BUL_INH;
        end
        for (int c = 0; c < N_COLS; c++)
          if (CW'(c) == col) begin
            if (fe == FE_MAIN) wl_lvl[c] = WL_VERS;
            else               wlb_lvl[c] = WL_VERS;
          end
      end
      LOP_COMPUTE: begin
        for (int r = 0; r < N_ROWS; r++)
          if (RW'(r) == row) bl_lvl[r] = BL_GND;
        for (int c = 0; c < N_COLS; c++) begin
          unique case (mode)
            MODE_XOR_MAC: begin
              wl_lvl[c]  = x[c] ? WL_VH : WL_GND;
              wlb_lvl[c] = x[c] ? WL_GND : WL_VH;
            end
            MODE_AND_MAC:  wl_lvl[c] = x[c] ? WL_VH : WL_GND;
            MODE_LOGIC_AND,
            MODE_LOGIC_OR: wl_lvl[c] = col_mask[c] ? WL_VH : WL_GND;
            MODE_FULL_ADD: wl_lvl[c] = (col_mask[c] && x[c]) ? WL_VH : WL_GND;
            MODE_CAL_READ: if (CW'(c) == col) begin
              wl_lvl[c]  = WL_VH;
              wlb_lvl[c] = WL_VH;
            end
            default: ;
          endcase
        end
      end
      default: ;
    endcase
  end

endmodule
