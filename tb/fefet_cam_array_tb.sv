// fefet_cam_array_tb: exercises the FeFET CAM array model with line biases set directly.
//   * column program (+4 V on one WL) moves every device on that line to its LVT and no other;
//   * erase (-4 V, selected row's BuL 0 V, other rows -2 V) moves only the selected device to
//     HVT - the others in the column are not disturbed;
//   * compute read: only the row with a grounded BL conducts, g = K_FE*(V_H - VT) for LVT;
//   * partial erase with the BuL stepped from -2 V toward 0 V raises one device's VT step by step
//     (never down), following VT_LVT + (VT_HVT-VT_LVT)*(|Vgb|-2)/2, leaving the other rows alone.
// Expected VT values are computed here from the model's documented constants.
module fefet_cam_array_tb;
  import tdimc_pkg::*;
  localparam int N = 3, C = 3;
  int checks = 0, failures = 0;

  wl_lvl_e wl[C], wlb[C]; bl_lvl_e bl[N]; bul_lvl_e bul[N];
  logic [5:0] bul_code = '0;
  real v_h = 0.65;
  logic wr_pulse = 0;
  real g_sl[C];

  fefet_cam_array #(.N_ROWS(N), .N_COLS(C)) dut (.wl_lvl(wl), .wlb_lvl(wlb), .bl_lvl(bl), .bul_lvl(bul),
                                                   .bul_code, .v_h, .wr_pulse, .g_sl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real lvt(int r, int c, int f);
    return 0.30 + 0.15 * real'(((r * 7 + c * 3 + f * 5) % 5) - 2) / 2.0;
  endfunction

  task automatic idle();
    foreach (wl[c]) begin wl[c] = WL_GND; wlb[c] = WL_GND; end
    foreach (bl[r]) begin bl[r] = BL_HIZ; bul[r] = BUL_GND; end
  endtask

  task automatic pulse();
    #1 wr_pulse = 1; #1 wr_pulse = 0; #1;
  endtask

  task automatic chk_vt(int r, int c, int f, real exp, string what);
    checks++;
    if (dut.vt[r][c][f] < exp - 1e-6 || dut.vt[r][c][f] > exp + 1e-6) begin
      failures++; $display("%s: vt[%0d][%0d][%0d] = %f, expected %f", what, r, c, f, dut.vt[r][c][f], exp);
    end
  endtask

  task automatic chk_real(real got, real exp, string what);
    checks++;
    if (got < exp - 1e-7 || got > exp + 1e-7) begin failures++; $display("%s: %g expected %g", what, got, exp); end
  endtask

  real vt_exp [N][C][2];

  initial begin
    idle(); #1;
    foreach (vt_exp[r, c, f]) vt_exp[r][c][f] = 1.5;
    // Program column 1, main devices.
    foreach (bl[r]) bl[r] = BL_GND;
    wl[1] = WL_VPGM; pulse();
    for (int r = 0; r < N; r++) vt_exp[r][1][0] = lvt(r, 1, 0);
    foreach (vt_exp[r, c, f]) chk_vt(r, c, f, vt_exp[r][c][f], "after program");
    // Program column 1 complementary devices, then column 2 main.
    idle(); foreach (bl[r]) bl[r] = BL_GND; wlb[1] = WL_VPGM; pulse();
    idle(); foreach (bl[r]) bl[r] = BL_GND; wl[2] = WL_VPGM; pulse();
    for (int r = 0; r < N; r++) begin vt_exp[r][1][1] = lvt(r, 1, 1); vt_exp[r][2][0] = lvt(r, 2, 0); end
    foreach (vt_exp[r, c, f]) chk_vt(r, c, f, vt_exp[r][c][f], "after program 2");
    // Erase cell (row 1, col 1, main) with -2 V inhibit on rows 0 and 2.
    idle(); foreach (bl[r]) bl[r] = BL_GND;
    bul[0] = BUL_INH; bul[2] = BUL_INH; wl[1] = WL_VERS; pulse();
    vt_exp[1][1][0] = 1.5;
    foreach (vt_exp[r, c, f]) chk_vt(r, c, f, vt_exp[r][c][f], "after erase");
    // Erase without inhibit would disturb: row 0's device in col 2 erased with bulks all 0 V.
    idle(); foreach (bl[r]) bl[r] = BL_GND; wl[2] = WL_VERS; pulse();
    for (int r = 0; r < N; r++) vt_exp[r][2][0] = 1.5;
    foreach (vt_exp[r, c, f]) chk_vt(r, c, f, vt_exp[r][c][f], "erase without inhibit");
    // Compute reads on each row: WL1 = V_H.
    for (int r = 0; r < N; r++) begin
      idle(); bl[r] = BL_GND; wl[1] = WL_VH; #1;
      chk_real(g_sl[1], ((vt_exp[r][1][0] < 0.65) ? 0.05 * (0.65 - vt_exp[r][1][0]) : 1e-6) + 1e-6, "read WL");
      chk_real(g_sl[0], 2e-6, "read other column");
      idle(); bl[r] = BL_GND; wlb[1] = WL_VH; #1;
      chk_real(g_sl[1], ((vt_exp[r][1][1] < 0.65) ? 0.05 * (0.65 - vt_exp[r][1][1]) : 1e-6) + 1e-6, "read WLB");
    end
    idle(); wl[1] = WL_VH; #1;
    chk_real(g_sl[1], 0.0, "all rows Hi-Z");
    // Partial erase sweep on (row 2, col 1, complementary device).
    for (int code = 0; code < 64; code += 3) begin
      real vb, tgt;
      idle(); foreach (bl[r]) bl[r] = BL_GND;
      bul[0] = BUL_INH; bul[1] = BUL_INH; bul[2] = BUL_MLS; bul_code = 6'(code); wlb[1] = WL_VERS;
      pulse();
      vb = -2.0 + 2.0 * code / 63.0;
      tgt = 0.30 + 1.2 * ((4.0 + vb) - 2.0) / 2.0;
      if ((4.0 + vb) > 2.0 + 1e-6 && tgt > vt_exp[2][1][1]) vt_exp[2][1][1] = tgt;
      foreach (vt_exp[r, c, f]) chk_vt(r, c, f, vt_exp[r][c][f], $sformatf("MLS code %0d", code));
    end
    chk_vt(2, 1, 1, 1.5, "MLS reaches HVT at BuL 0 V");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
