// fefet_cam_array: behavioural model of the N_ROWS x N_COLS C-AND FeFET CAM array (not
// synthesizable logic: FeFET threshold voltages are analog state, kept here as reals).
//
// Each cell holds two FeFETs: the main device on the column's WL and the complementary device
// on WL-bar. Both sources tie to the column's source line SL, which is the tail of that column's
// delay element; drains tie to the row's bit line BL, bodies to the row's bulk line BuL
// (triple-well, one bulk per row). Word lines are per column, BL and BuL per row.
//
// Writing. On each rising edge of wr_pulse the model applies one pulse with the present line
// biases to every device, using its gate-to-bulk voltage Vgb = V(WL) - V(BuL):
//   Vgb >= +3.5 V           -> program to the device's LVT (column program, WL = 4 V)
//   Vgb <= -2 V - epsilon   -> erase toward HVT; the VT rises to
//                              max(VT, VT_LVT + (VT_HVT - VT_LVT) * (|Vgb| - 2) / 2),
//                              so a full -4 V erase reaches HVT and a BuL between -2 V and 0 V
//                              (WL at -4 V) gives an intermediate multilevel state
//   otherwise               -> no change; in particular the -2 V inhibit on unselected rows
//                              (Vgb = -2 V) and unselected columns (Vgb = +2 V) do not disturb.
// The 4 V / -4 V / -2 V biases and the BuL sweep are the paper's; the switching law, the
// thresholds, VT values and the per-device LVT mismatch (a fixed offset within +/-LVT_SPREAD) are
// this model's own. The BuL partial-erase level is V = -2 + 2*bul_code/(2^BULW-1).
//
// Reading. A device conducts g = K_FE*(Vg - VT) mS when its gate is above VT (the linear-region
// resistance of the paper's R_CAM expression), G_OFF otherwise. g_sl[c] sums both devices of
// every row whose BL is grounded; rows left Hi-Z do not conduct. g_sl is updated combinationally.
module fefet_cam_array
  import tdimc_pkg::*;
#(
  parameter int  N_ROWS     = 3,
  parameter int  N_COLS     = 3,
  parameter int  BULW       = 6,
  parameter real VT_LVT     = 0.30,   // nominal LVT (V)
  parameter real VT_HVT     = 1.50,   // HVT (V)
  parameter real LVT_SPREAD = 0.15,   // device-to-device LVT mismatch bound (V)
  parameter real K_FE       = 0.05,   // transconductance factor times W/L (mS/V)
  parameter real G_OFF      = 1.0e-6  // off-state conductance (mS)
) (
  input  wl_lvl_e          wl_lvl  [N_COLS],
  input  wl_lvl_e          wlb_lvl [N_COLS],
  input  bl_lvl_e          bl_lvl  [N_ROWS],
  input  bul_lvl_e         bul_lvl [N_ROWS],
  input  logic [BULW-1:0]  bul_code,
  input  real              v_h,
  input  logic             wr_pulse,
  output real              g_sl [N_COLS]
);

  // Threshold voltages, [row][col]; index 0 main device, 1 complementary device.
  real vt     [N_ROWS][N_COLS][2];
  real vt_lvt [N_ROWS][N_COLS][2];

  function automatic real wl_volt(wl_lvl_e l, real vh);
    case (l)
      WL_VH:   return vh;
      WL_VPGM: return V_PGM;
      WL_VERS: return V_ERS;
      default: return 0.0;
    endcase
  endfunction

  function automatic real bul_volt(bul_lvl_e l, logic [BULW-1:0] code);
    case (l)
      BUL_INH: return V_INH;
      BUL_MLS: return V_INH + 2.0 * real'(code) / real'((1 << BULW) - 1);
      default: return 0.0;
    endcase
  endfunction

  function automatic real g_dev(real vg, real vth);
    return (vg > vth) ? K_FE * (vg - vth) : G_OFF;
  endfunction

  // Fixed mismatch pattern: offsets of -1, -1/2, 0, +1/2, +1 times LVT_SPREAD.
  initial begin
    for (int r = 0; r < N_ROWS; r++)
      for (int c = 0; c < N_COLS; c++)
        for (int f = 0; f < 2; f++) begin
          vt_lvt[r][c][f] = VT_LVT + LVT_SPREAD * real'(((r * 7 + c * 3 + f * 5) % 5) - 2) / 2.0;
          vt[r][c][f]     = VT_HVT;
        end
  end

  always @(posedge wr_pulse) begin
    for (int r = 0; r < N_ROWS; r++)
      for (int c = 0; c < N_COLS; c++)
        for (int f = 0; f < 2; f++) begin
          real vgb, tgt;
          vgb = wl_volt((f == 0) ? wl_lvl[c] : wlb_lvl[c], v_h) - bul_volt(bul_lvl[r], bul_code);
          if (vgb >= 3.5) begin
            vt[r][c][f] <= vt_lvt[r][c][f];
          end else if (vgb < -2.0 - 1.0e-6) begin
            tgt = VT_LVT + (VT_HVT - VT_LVT) * ((-vgb) - 2.0) / 2.0;
            if (tgt > VT_HVT) tgt = VT_HVT;
            if (tgt > vt[r][c][f]) vt[r][c][f] <= tgt;
          end
        end
  end

  always_comb begin
    for (int c = 0; c < N_COLS; c++) begin
      g_sl[c] = 0.0;
      for (int r = 0; r < N_ROWS; r++)
        if (bl_lvl[r] == BL_GND)
          g_sl[c] = g_sl[c] + g_dev(wl_volt(wl_lvl[c], v_h), vt[r][c][0])
                            + g_dev(wl_volt(wlb_lvl[c], v_h), vt[r][c][1]);
    end
  end

endmodule
