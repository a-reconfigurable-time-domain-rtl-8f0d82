// td_nvimc_macro: top level of the reconfigurable time-domain FeFET in-memory-computing macro.
//
// Data path (as in the paper's architecture figure): the sequencer's DEC_I pulse enters both the
// delay-element chain and the reference delay line. Stage j of the chain is starved through
// source line SL_j of the FeFET CAM array, so with one row's BL grounded its delay is short
// (t_dL) when that cell conducts and long (t_dH, leaker only) when it does not. The chain output
// DEC_O is sampled by the flash TDC against REF[M:0]; the thermometer code is captured by the
// sequencer, converted to binary TDC_O, and decoded into the operation's result. DEC_O is also
// brought out as pulse_out for the off-chip output driver.
// Control path: a scan chain holds the configuration; the sequencer turns commands into line
// set-ups (through the line decoders), write pulses, and DEC_I pulses.
//
// Configuration word (scan_chain cfg_q, LSB first):
//   mode[2:0] | row[RW] | col[CW] | x[M] | col_mask[M] | w_col[N_ROWS] | cb_code[CBW] |
//   cal_en | cal_target[OW]
// Commands: start with cmd = CMD_WRITE_COL (write and optionally calibrate column `col` with
// w_col) or CMD_COMPUTE (one operation in `mode` on `row`). busy is high until done pulses.
// Results (valid from done until the next command): tdc_th (captured TDC_Th), tdc_o,
// mac_val, logic_out, fa_sum, fa_carry, overrange. cal_fail flags rows whose last calibration
// did not converge.
// Analog inputs: v_h (compute/read gate level V_H), v_leak (leaker bias), v_step and v_shift
// (reference delay line biases). Defaults N_ROWS = N_COLS = 3 are the test chip's 3x3 array,
// 3-stage chain and 2-bit TDC. The array, delay elements and reference line are behavioural
// models; the rest is synthesizable.
//
// Lint note: dec_i is a flip-flop output of the sequencer that also starts the behavioural
// reference line (an event-driven delay, not a clock), and rst_n also disables the sequencer's
// assertions; a linter therefore reports both as used synchronously and asynchronously. This is
// intended: the time-domain path is asynchronous by nature.
module td_nvimc_macro
  import tdimc_pkg::*;
#(
  parameter int N_ROWS     = 3,
  parameter int N_COLS     = 3,
  parameter int BULW       = 6,
  parameter int CBW        = 3,
  parameter int WR_CYC     = 2,
  parameter int SETTLE_CYC = 4,
  localparam int M    = N_COLS,
  localparam int OW   = $clog2(M + 1),
  localparam int RW   = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  localparam int CW   = (N_COLS > 1) ? $clog2(N_COLS) : 1,
  localparam int CFGW = 3 + RW + CW + 2 * M + N_ROWS + CBW + 1 + OW
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration scan chain
  input  logic                scan_en,
  input  logic                scan_in,
  input  logic                scan_update,
  output logic                scan_out,
  // command
  input  logic                start,
  input  cmd_e                cmd,
  output logic                busy,
  output logic                done,
  // analog biases
  input  real                 v_h,
  input  real                 v_leak,
  input  real                 v_step,
  input  real                 v_shift,
  // results
  output logic [M:0]          tdc_th,
  output logic [OW-1:0]       tdc_o,
  output logic signed [OW:0]  mac_val,
  output logic                logic_out,
  output logic                fa_sum,
  output logic                fa_carry,
  output logic                overrange,
  output logic [N_ROWS-1:0]   cal_fail,
  output logic [15:0]         mls_pulses,
  output logic                pulse_out
);

  // ---------------- configuration ----------------
  logic [CFGW-1:0] cfg;
  scan_chain #(.WIDTH(CFGW)) u_scan (
    .clk, .rst_n, .scan_en, .scan_in, .update(scan_update), .scan_out, .cfg_q(cfg)
  );

  localparam int P_ROW  = 3;
  localparam int P_COL  = P_ROW + RW;
  localparam int P_X    = P_COL + CW;
  localparam int P_MASK = P_X + M;
  localparam int P_W    = P_MASK + M;
  localparam int P_CB   = P_W + N_ROWS;
  localparam int P_CAL  = P_CB + CBW;
  localparam int P_TGT  = P_CAL + 1;

  mode_e             cfg_mode;
  logic [RW-1:0]     cfg_row;
  logic [CW-1:0]     cfg_col;
  logic [M-1:0]      cfg_x, cfg_mask;
  logic [N_ROWS-1:0] cfg_w;
  logic [CBW-1:0]    cfg_cb;
  logic              cfg_cal_en;
  logic [OW-1:0]     cfg_tgt;
  always_comb begin
    cfg_mode   = mode_e'(cfg[2:0]);
    cfg_row    = cfg[P_ROW +: RW];
    cfg_col    = cfg[P_COL +: CW];
    cfg_x      = cfg[P_X +: M];
    cfg_mask   = cfg[P_MASK +: M];
    cfg_w      = cfg[P_W +: N_ROWS];
    cfg_cb     = cfg[P_CB +: CBW];
    cfg_cal_en = cfg[P_CAL];
    cfg_tgt    = cfg[P_TGT +: OW];
  end

  // ---------------- sequencer ----------------
  line_op_e        l_op;
  mode_e           l_mode, res_mode;
  logic [RW-1:0]   l_row;
  logic [CW-1:0]   l_col;
  fe_sel_e         l_fe;
  logic [M-1:0]    l_x, l_mask;
  logic [BULW-1:0] bul_code;
  logic            wr_pulse, dec_i, tdc_rst_n;
  logic [M:0]      th_live;

  op_sequencer #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS), .BULW(BULW), .WR_CYC(WR_CYC), .SETTLE_CYC(SETTLE_CYC)
  ) u_seq (
    .clk, .rst_n, .start, .cmd,
    .cfg_mode, .cfg_row, .cfg_col, .cfg_x, .cfg_mask, .cfg_w, .cfg_cal_en,
    .cfg_cal_target(cfg_tgt),
    .tdc_th(th_live), .code(tdc_o),
    .l_op, .l_mode, .l_row, .l_col, .l_fe, .l_x, .l_mask, .bul_code,
    .wr_pulse, .dec_i, .tdc_rst_n, .th_q(tdc_th), .res_mode,
    .busy, .done, .cal_fail, .mls_pulses
  );

  // ---------------- array and line decoders ----------------
  wl_lvl_e  wl_lvl  [N_COLS];
  wl_lvl_e  wlb_lvl [N_COLS];
  bl_lvl_e  bl_lvl  [N_ROWS];
  bul_lvl_e bul_lvl [N_ROWS];
  real      g_sl    [N_COLS];

  line_decoder #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_dec (
    .op(l_op), .mode(l_mode), .row(l_row), .col(l_col), .fe(l_fe), .x(l_x), .col_mask(l_mask),
    .wl_lvl, .wlb_lvl, .bl_lvl, .bul_lvl
  );

  fefet_cam_array #(.N_ROWS(N_ROWS), .N_COLS(N_COLS), .BULW(BULW)) u_array (
    .wl_lvl, .wlb_lvl, .bl_lvl, .bul_lvl, .bul_code, .v_h, .wr_pulse, .g_sl
  );

  // ---------------- time domain ----------------
  logic       dec_o;
  logic [M:0] ref_s;

  de_chain #(.N_COLS(N_COLS), .CBW(CBW)) u_chain (
    .dec_i, .g_sl, .v_leak, .cb_code(cfg_cb), .dec_o
  );

  ref_delay_line #(.M(M)) u_rdl (
    .dec_i, .v_step, .v_shift, .ref_o(ref_s)
  );

  tdc #(.M(M)) u_tdc (
    .dec_o, .ref_i(ref_s), .rst_n(tdc_rst_n), .tdc_th(th_live)
  );

  therm2bin #(.M(M)) u_deco (
    .th(tdc_th), .code(tdc_o)
  );

  result_decoder #(.M(M)) u_res (
    .mode(res_mode), .col_mask(l_mask), .tdc_th, .tdc_o,
    .mac_val, .logic_out, .fa_sum, .fa_carry, .overrange
  );

  assign pulse_out = dec_o;

endmodule
