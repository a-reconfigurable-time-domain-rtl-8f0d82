// op_sequencer_tb: checks the macro controller against a small model of the array + TDC.
// The testbench plays the analog side: during a calibration read it returns the thermometer
// code of a per-row "level" that each partial-erase (MLS) pulse on that row raises by one,
// unless the row is marked stuck; during a compute it returns a fixed pattern.
// Checked: the exact order of program / erase pulses for the XOR and AND weight encodings
// (worked out here from the encoding rules), the line set-up during each pulse, the BuL code
// stepping of the calibration loop, its ending on target, on overshoot and on an exhausted BuL
// code, the cal_fail flags and the MLS pulse counter, and the compute latency of
// 2 + 2*SETTLE_CYC clock edges from the edge that samples start to the edge that raises done,
// with DEC_I high for SETTLE_CYC-1 cycles.
module op_sequencer_tb;
  import tdimc_pkg::*;
  localparam int N = 3, C = 3, M = 3, OW = 2, BULW = 3, SETTLE = 4;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0;
  cmd_e cmd = CMD_NONE;
  mode_e cfg_mode = MODE_XOR_MAC;
  logic [1:0] cfg_row = '0, cfg_col = '0;
  logic [M-1:0] cfg_x = '0, cfg_mask = '0;
  logic [N-1:0] cfg_w = '0;
  logic cfg_cal_en = 0;
  logic [OW-1:0] cfg_cal_target = '0;
  logic [M:0] tdc_th;
  logic [OW-1:0] code;
  line_op_e l_op; mode_e l_mode; logic [1:0] l_row, l_col; fe_sel_e l_fe;
  logic [M-1:0] l_x, l_mask; logic [BULW-1:0] bul_code;
  logic wr_pulse, dec_i, tdc_rst_n, busy, done;
  logic [M:0] th_q; mode_e res_mode; logic [N-1:0] cal_fail; logic [15:0] mls_pulses;

  op_sequencer #(.N_ROWS(N), .N_COLS(C), .BULW(BULW), .WR_CYC(2), .SETTLE_CYC(SETTLE)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- analog-side model ----
  int level [N];
  bit stuck [N];
  int reads [N];
  localparam logic [M:0] CMP_PATTERN = 4'b1100;
  function automatic logic [M:0] therm(int s);  // TDC_Th[i] = 1 iff s <= i
    logic [M:0] t;
    for (int i = 0; i <= M; i++) t[i] = (s <= i);
    return t;
  endfunction
  always_comb begin
    if (!dec_i) tdc_th = '0;
    else if (l_mode == MODE_CAL_READ) tdc_th = therm(level[l_row]);
    else tdc_th = CMP_PATTERN;
  end
  always_comb begin : zeros
    int z;
    z = 0;
    for (int i = 0; i <= M; i++) z += th_q[i] ? 0 : 1;
    code = (z > M) ? OW'(M) : OW'(z);
  end

  // ---- pulse log ----
  typedef struct packed { line_op_e op; logic [1:0] row; logic [1:0] col; fe_sel_e fe; logic [BULW-1:0] bc; } ev_t;
  ev_t log_q[$];
  int  dec_high, dec_pulses;
  always @(posedge clk) begin
    if (wr_pulse && !$past(wr_pulse)) begin
      log_q.push_back('{l_op, l_row, l_col, l_fe, bul_code});
      if (l_op == LOP_MLS && !stuck[l_row]) level[l_row]++;
    end
    if (dec_i) dec_high++;
    if (dec_i && !$past(dec_i)) begin
      dec_pulses++;
      if (l_mode == MODE_CAL_READ) reads[l_row]++;
    end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Expected write pulses for a column write without calibration.
  ev_t exp_q[$];
  function automatic void expect_write(logic [N-1:0] w, bit xm, logic [1:0] col);
    exp_q.push_back('{LOP_PROGRAM, 2'd0, col, FE_MAIN, 3'd0});
    exp_q.push_back('{LOP_PROGRAM, 2'd0, col, FE_COMP, 3'd0});
    for (int r = 0; r < N; r++) begin
      bit main_hvt = !w[r];
      bit comp_hvt = xm ? w[r] : 1'b1;
      if (main_hvt) exp_q.push_back('{LOP_ERASE, 2'(r), col, FE_MAIN, 3'd0});
      if (comp_hvt) exp_q.push_back('{LOP_ERASE, 2'(r), col, FE_COMP, 3'd0});
    end
  endfunction

  task automatic run(cmd_e c, output int lat);
    int n = 0;
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0; cmd = CMD_NONE; n = 1;
    while (!done) begin @(negedge clk); n++; end
    lat = n - 1;  // clock edges from the one that samples start to the one that raises done
    @(negedge clk);
    chk(!busy, "busy drops after done");
  endtask

  task automatic write_check(logic [N-1:0] w, mode_e m, logic [1:0] col);
    int lat;
    log_q.delete(); exp_q.delete();
    cfg_w = w; cfg_mode = m; cfg_col = col; cfg_cal_en = 0;
    run(CMD_WRITE_COL, lat);
    expect_write(w, m == MODE_XOR_MAC, col);
    chk(log_q.size() == exp_q.size(), $sformatf("write %b mode %0d: %0d pulses, expected %0d", w, m, log_q.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < log_q.size(); i++) begin
      chk(log_q[i].op == exp_q[i].op && log_q[i].col == exp_q[i].col && log_q[i].fe == exp_q[i].fe &&
          (exp_q[i].op == LOP_PROGRAM || log_q[i].row == exp_q[i].row),
          $sformatf("write %b mode %0d pulse %0d: op %0d row %0d fe %0d", w, m, i, log_q[i].op, log_q[i].row, log_q[i].fe));
    end
  endtask

  initial begin
    int lat, dh0, mls0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !done && !wr_pulse && !dec_i, "idle after reset");

    // Compute: latency and pulse shape.
    cfg_mode = MODE_AND_MAC; cfg_row = 2'd1; cfg_x = 3'b101; cfg_mask = 3'b011;
    dh0 = dec_high; dec_pulses = 0;
    run(CMD_COMPUTE, lat);
    chk(lat == 2 + 2 * SETTLE, $sformatf("compute latency %0d, expected %0d", lat, 2 + 2 * SETTLE));
    chk(dec_high - dh0 == SETTLE - 1 && dec_pulses == 1, $sformatf("DEC_I high %0d cycles in %0d pulses", dec_high - dh0, dec_pulses));
    chk(th_q == CMP_PATTERN, "captured TDC pattern");
    chk(res_mode == MODE_AND_MAC && l_row == 2'd1 && l_x == 3'b101 && l_mask == 3'b011, "compute set-up held");
    chk(log_q.size() == 0, "no write pulse during compute");

    // Writes without calibration: every weight pattern, both encodings.
    for (int w = 0; w < 8; w++) begin
      write_check(3'(w), MODE_XOR_MAC, 2'(w % 3));
      write_check(3'(w), MODE_AND_MAC, 2'((w + 1) % 3));
    end

    // Calibration, XOR encoding (every row has one LVT device): levels 0,1,2 -> target 2.
    level = '{0, 1, 2}; stuck = '{0, 0, 0}; reads = '{0, 0, 0};
    cfg_w = 3'b010; cfg_mode = MODE_XOR_MAC; cfg_col = 2'd2; cfg_cal_en = 1; cfg_cal_target = 2'd2;
    mls0 = mls_pulses; log_q.delete();
    run(CMD_WRITE_COL, lat);
    chk(cal_fail == 3'b000, $sformatf("cal_fail %b on reachable targets", cal_fail));
    chk(level[0] == 2 && level[1] == 2 && level[2] == 2, "all rows calibrated to target");
    chk(mls_pulses - mls0 == 3, $sformatf("MLS pulse count %0d, expected 3", mls_pulses - mls0));
    chk(reads[0] == 3 && reads[1] == 2 && reads[2] == 1, $sformatf("calibration reads %0d %0d %0d", reads[0], reads[1], reads[2]));
    begin
      int k = 0; int prev_row = -1; int idx = 0;
      foreach (log_q[i]) if (log_q[i].op == LOP_MLS) begin
        if (log_q[i].row != prev_row) idx = 0;
        idx++; prev_row = log_q[i].row; k++;
        chk(log_q[i].bc == 3'(idx), $sformatf("BuL code %0d at MLS pulse %0d of row %0d", log_q[i].bc, idx, log_q[i].row));
        chk(log_q[i].col == 2'd2, "MLS pulse column");
        // XOR encoding: the LVT device of a -1 (w=0) cell is the complementary one.
        chk(log_q[i].fe == (cfg_w[log_q[i].row] ? FE_MAIN : FE_COMP), "MLS pulse device");
      end
      chk(k == 3, "three MLS pulses logged");
    end

    // Calibration, AND encoding: w=0 row has no LVT device and is skipped; overshoot and
    // an exhausted BuL code both flag cal_fail.
    level = '{3, 0, 0}; stuck = '{0, 1, 0}; reads = '{0, 0, 0};
    cfg_w = 3'b011; cfg_mode = MODE_AND_MAC; cfg_col = 2'd0; cfg_cal_target = 2'd2;
    mls0 = mls_pulses;
    run(CMD_WRITE_COL, lat);
    chk(cal_fail == 3'b011, $sformatf("cal_fail %b, expected 011", cal_fail));
    chk(reads[2] == 0, "row without an LVT device is not read");
    chk(reads[0] == 1, "overshooting row read once");
    chk(reads[1] == (1 << BULW), $sformatf("stuck row read %0d times", reads[1]));
    chk(mls_pulses - mls0 == (1 << BULW) - 1, $sformatf("stuck row got %0d MLS pulses", mls_pulses - mls0));

    // A start while busy is ignored; cal_fail is cleared by the next write.
    cfg_cal_en = 0;
    @(negedge clk); cmd = CMD_WRITE_COL; start = 1;
    @(negedge clk); cmd = CMD_COMPUTE;
    @(negedge clk); start = 0; cmd = CMD_NONE;
    while (!done) @(negedge clk);
    chk(cal_fail == 3'b000, "cal_fail cleared by a new write");
    @(negedge clk);
    chk(!busy, "second start while busy was ignored");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
