// td_nvimc_macro_tb: end-to-end test of the macro at its default size (3x3 array, 3-stage delay
// chain, 2-bit TDC), with no parameter overrides.
//
// The testbench acts as the bench: it loads the configuration word through the scan chain,
// issues commands, and sets the analog biases (V_H, leaker bias, reference-line shift and step)
// from delays it measures on the macro's own DEC_O output:
//   1. on the erased array it measures the all-slow chain delay, 3*t_dH;
//   2. for each weight load it writes every column with its weight bits, first without and then
//      with multilevel calibration, and measures each LVT cell through a calibration read before
//      and after; the spread of the cells' delays must shrink to about one calibration window;
//   3. it places the reference taps between the arrival times of 0..M slow stages from the
//      measured delays, then runs XOR-MAC and AND-MAC for every 3-bit input against every 3-bit
//      weight pattern (3 loads of 3 rows cover all 8 patterns, so 64 pairs per MAC type), logic
//      AND / OR on 2 and 3 selected columns, and the 3-input full adder, comparing each result
//      with the value computed here from the inputs and the stored weights;
//   4. it checks the compute latency, an overrange (reference line too short) and a
//      calibration that overshoots its window and is flagged.
// Each mechanism is counted (column program, erase with row inhibit, partial-erase pulses,
// calibrated cells, calibration failure, every compute mode, mode switches, overrange, scan
// loads, a capacitor-bank change) and one that never happened counts as a failure.
module td_nvimc_macro_tb;
  import tdimc_pkg::*;
  localparam int N = 3, M = 3, SETTLE = 4;
  localparam real TCLK = 10.0;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_in = 0, scan_update = 0, scan_out;
  logic start = 0;
  cmd_e cmd = CMD_NONE;
  logic busy, done;
  real v_h = 0.65, v_leak = 0.70, v_step = 0.85, v_shift = 0.85;
  logic [M:0] tdc_th;
  logic [1:0] tdc_o;
  logic signed [2:0] mac_val;
  logic logic_out, fa_sum, fa_carry, overrange, pulse_out;
  logic [N-1:0] cal_fail;
  logic [15:0] mls_pulses;

  td_nvimc_macro dut (.*);

  always #(TCLK / 2) clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_cb, n_pgm, n_ers, n_inh, n_mls, n_scan, n_cal_ok, n_cal_fail, n_ovr, n_switch;
  int n_mode [6];
  mode_e last_mode = MODE_CAL_READ;
  always @(posedge dut.wr_pulse) begin
    case (dut.l_op)
      LOP_PROGRAM: n_pgm++;
      LOP_ERASE: begin
        bit inh;
        inh = 1;
        n_ers++;
        for (int r = 0; r < N; r++)
          if (r != int'(dut.l_row) && dut.bul_lvl[r] != BUL_INH) inh = 0;
        if (inh) n_inh++;
      end
      LOP_MLS: n_mls++;
      default: ;
    endcase
  end

  // DEC_O arrival time, measured from the clock edge that raises DEC_I.
  realtime t_dec, t_arr;
  always @(posedge dut.dec_i) t_dec = $realtime;
  always @(posedge pulse_out) t_arr = $realtime - t_dec;

  // ---------------- configuration word ----------------
  // mode[2:0] row[4:3] col[6:5] x[9:7] mask[12:10] w[15:13] cb[18:16] cal_en[19] tgt[21:20]
  localparam int CFGW = 22;
  logic [2:0] cfg_cb = 3'd4;
  function automatic logic [CFGW-1:0] cfg_word(mode_e mode, int row, int col, logic [2:0] x,
                                              logic [2:0] mask, logic [2:0] w, bit cal_en,
                                              int tgt);
    return {2'(tgt), cal_en, cfg_cb, w, mask, x, 2'(col), 2'(row), 3'(mode)};
  endfunction

  task automatic scan_load(logic [CFGW-1:0] word);
    for (int i = CFGW - 1; i >= 0; i--) begin
      @(negedge clk); scan_en = 1; scan_in = word[i];
    end
    @(negedge clk); scan_en = 0; scan_update = 1;
    @(negedge clk); scan_update = 0;
    n_scan++;
  endtask

  task automatic run(cmd_e c, output int lat);
    int n;
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0; cmd = CMD_NONE; n = 1;
    while (!done) begin
      @(negedge clk); n++;
      if (n > 100000) break;
    end
    lat = n - 1;
  endtask

  // ---------------- bias setting ----------------
  // The reference stage delay falls with its bias voltage; its inverse is taken from the
  // stage's starved-inverter law t = T0 + C/(K*(V - VT)).
  function automatic real v_for(real t_ns);
    return 0.35 + 2.0 / (0.05 * (t_ns - 0.02) * 1000.0);
  endfunction
  real t_dh, t_dl;
  localparam real CAL_TDL = 0.45, CAL_WIN = 0.10;
  task automatic bias_cal();
    v_shift = v_for(2.0 * t_dh + CAL_TDL - CAL_WIN);
    v_step  = v_for(CAL_WIN);
  endtask
  task automatic bias_compute();
    v_shift = v_for(M * t_dl + (t_dh - t_dl) / 2.0);
    v_step  = v_for(t_dh - t_dl);
  endtask

  // ---------------- array contents ----------------
  logic [2:0] pat [N];  // pattern held by row r; bit c is column c
  int lat;

  task automatic compute(mode_e mode, int row, logic [2:0] x, logic [2:0] mask);
    scan_load(cfg_word(mode, row, 0, x, mask, 3'b000, 0, 2));
    run(CMD_COMPUTE, lat);
    chk(lat == 2 + 2 * SETTLE, $sformatf("compute latency %0d", lat));
    n_mode[mode]++;
    if (mode != last_mode) n_switch++;
    last_mode = mode;
  endtask

  // Writes all three columns of the current patterns, returns the LVT cells' delays.
  real cell_t [N];
  task automatic load(bit xor_enc, bit cal);
    mode_e m;
    m = xor_enc ? MODE_XOR_MAC : MODE_AND_MAC;
    for (int c = 0; c < M; c++) begin
      logic [2:0] w;
      for (int r = 0; r < N; r++) w[r] = pat[r][c];
      scan_load(cfg_word(m, 0, c, 3'b000, 3'b000, w, cal, M - 1));
      run(CMD_WRITE_COL, lat);
      if (cal) begin
        chk(cal_fail == '0, $sformatf("calibration of column %0d: cal_fail %b", c, cal_fail));
        for (int r = 0; r < N; r++) if (xor_enc || w[r]) n_cal_ok += cal_fail[r] ? 0 : 1;
      end
    end
  endtask

  // Measures every LVT cell with a calibration read; returns min/max of (arrival - 2*t_dH).
  task automatic measure_cells(bit xor_enc, output real tmin, output real tmax, output real tsum, output int n);
    tmin = 1e9; tmax = -1e9; tsum = 0; n = 0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < M; c++)
        if (xor_enc || pat[r][c]) begin
          real t;
          scan_load(cfg_word(MODE_CAL_READ, r, c, 3'b000, 3'b000, 3'b000, 0, 2));
          run(CMD_COMPUTE, lat);
          n_mode[MODE_CAL_READ]++;
          t = t_arr - 2.0 * t_dh;
          if (t < tmin) tmin = t;
          if (t > tmax) tmax = t;
          tsum += t; n++;
        end
  endtask

  task automatic load_and_calibrate(bit xor_enc);
    real mn0, mx0, mn1, mx1, s;
    int n;
    bias_cal();
    load(xor_enc, 0);
    measure_cells(xor_enc, mn0, mx0, s, n);
    load(xor_enc, 1);
    measure_cells(xor_enc, mn1, mx1, s, n);
    chk(mn1 >= CAL_TDL - 0.002 && mx1 <= CAL_TDL + CAL_WIN + 0.002,
        $sformatf("calibrated t_dL in [%f, %f], window [%f, %f]", mn1, mx1, CAL_TDL, CAL_TDL + CAL_WIN));
    chk(mx1 - mn1 <= mx0 - mn0 + 1e-6,
        $sformatf("calibration spread %f ns, before %f ns", mx1 - mn1, mx0 - mn0));
    $display("fast-delay spread before calibration %.3f..%.3f ns, after %.3f..%.3f ns", mn0, mx0, mn1, mx1);
    t_dl = s / n;
    bias_compute();
  endtask

  function automatic int popc(logic [2:0] v);
    return int'(v[0]) + int'(v[1]) + int'(v[2]);
  endfunction

  initial begin
    int loads;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. all-slow chain delay on the erased array
    compute(MODE_AND_MAC, 0, 3'b111, 3'b111);
    t_dh = t_arr / 3.0;
    chk(t_dh > 0.5 && t_dh < 2.0, $sformatf("t_dH = %f ns", t_dh));
    // Capacitor bank: a larger code slows every stage (used to trim the delay step).
    begin
      real t_big;
      cfg_cb = 3'd6;
      compute(MODE_AND_MAC, 0, 3'b111, 3'b111);
      t_big = t_arr / 3.0;
      chk(t_big > t_dh + 0.1, $sformatf("t_dH %f ns at cb_code 6, %f ns at 4", t_big, t_dh));
      if (t_big > t_dh) n_cb++;
      cfg_cb = 3'd4;
    end

    // 2/3. XOR-MAC: three loads of three rows cover the 8 weight patterns.
    for (int L = 0; L < 3; L++) begin
      for (int r = 0; r < N; r++) pat[r] = 3'((3 * L + r) % 8);
      load_and_calibrate(1);
      for (int r = 0; r < N; r++)
        for (int x = 0; x < 8; x++) begin
          int e;
          e = 0;
          for (int c = 0; c < M; c++) e += (x[c] == pat[r][c]) ? 1 : -1;
          compute(MODE_XOR_MAC, r, 3'(x), 3'b111);
          chk(int'(mac_val) == e && !overrange,
              $sformatf("XOR-MAC row %0d w %b x %b: %0d expected %0d (th %b)", r, pat[r], 3'(x), mac_val, e, tdc_th));
        end
    end

    // AND-MAC, logic AND/OR and the full adder on AND-encoded loads.
    for (int L = 0; L < 3; L++) begin
      for (int r = 0; r < N; r++) pat[r] = 3'((3 * L + r) % 8);
      load_and_calibrate(0);
      for (int r = 0; r < N; r++) begin
        for (int x = 0; x < 8; x++) begin
          logic [2:0] a;
          a = 3'(x) & pat[r];
          compute(MODE_AND_MAC, r, 3'(x), 3'b111);
          chk(int'(mac_val) == popc(a) && !overrange,
              $sformatf("AND-MAC row %0d w %b x %b: %0d expected %0d", r, pat[r], 3'(x), mac_val, popc(a)));
          compute(MODE_FULL_ADD, r, 3'(x), 3'b111);
          chk(fa_sum == popc(a) % 2 && fa_carry == (popc(a) >= 2),
              $sformatf("full adder row %0d w %b x %b: s %b c %b", r, pat[r], 3'(x), fa_sum, fa_carry));
        end
        for (int m = 0; m < 8; m++) if (popc(3'(m)) >= 2) begin
          logic [2:0] mk;
          mk = 3'(m);
          compute(MODE_LOGIC_AND, r, 3'b000, mk);
          chk(logic_out == ((pat[r] & mk) == mk), $sformatf("AND row %0d w %b mask %b: %b", r, pat[r], mk, logic_out));
          compute(MODE_LOGIC_OR, r, 3'b000, mk);
          chk(logic_out == ((pat[r] & mk) != 0), $sformatf("OR row %0d w %b mask %b: %b", r, pat[r], mk, logic_out));
        end
      end
    end

    // 4. overrange: reference line shortened so that REF[M] comes before an all-slow DEC_O.
    v_step = v_for((t_dh - t_dl) / 4.0);
    compute(MODE_AND_MAC, 0, 3'b000, 3'b111);
    chk(overrange && tdc_o == 2'(M), $sformatf("overrange %b code %0d with short references", overrange, tdc_o));
    if (overrange) n_ovr++;
    bias_compute();
    compute(MODE_AND_MAC, 0, 3'b000, 3'b111);
    chk(!overrange && mac_val == 0, "no overrange with the normal references");

    // Calibration overshoot: window moved 0.5 ns early, so every cell reads above target 1.
    v_shift = v_for(2.0 * t_dh + CAL_TDL - CAL_WIN - 0.5);
    v_step  = v_for(CAL_WIN);
    pat[0] = 3'b111; pat[1] = 3'b000; pat[2] = 3'b101;
    scan_load(cfg_word(MODE_AND_MAC, 0, 0, 3'b000, 3'b000, 3'b101, 1, 1));
    run(CMD_WRITE_COL, lat);
    chk(cal_fail == 3'b101, $sformatf("overshoot flags %b, expected 101", cal_fail));
    n_cal_fail += popc(cal_fail);

    chk(n_pgm > 0, "column program never happened");
    chk(n_ers > 0 && n_inh == n_ers, $sformatf("erase %0d, with inhibit %0d", n_ers, n_inh));
    chk(n_mls > 0 && n_mls == int'(mls_pulses), $sformatf("MLS pulses %0d, counter %0d", n_mls, mls_pulses));
    chk(n_cal_ok > 0, "no cell calibrated");
    chk(n_cal_fail > 0, "calibration failure never flagged");
    for (int m = 0; m < 6; m++) chk(n_mode[m] > 0, $sformatf("mode %0d never run", m));
    chk(n_switch > 0, "no mode switch");
    chk(n_ovr > 0, "no overrange");
    chk(n_scan > 0, "no scan load");
    chk(n_cb > 0, "capacitor bank never changed the delay");
    $display("program %0d erase %0d (inhibited %0d) MLS %0d calibrated %0d cal_fail %0d overrange %0d scan %0d switches %0d",
             n_pgm, n_ers, n_inh, n_mls, n_cal_ok, n_cal_fail, n_ovr, n_scan, n_switch);
    $display("computes: XOR %0d AND %0d logic-AND %0d logic-OR %0d full-add %0d cal-read %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4], n_mode[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

