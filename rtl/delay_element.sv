// delay_element: behavioural model of one time-domain delay element (DE); analog, not
// synthesizable logic, so delays are computed in real arithmetic and applied with # controls.
//
// Circuit modelled: a current-starved inverter (CSI) whose pull-down tail is the column source
// line SL (the CAM cell, conductance g_sl) in parallel with an NMOS leaker biased at v_leak,
// loaded by a programmable capacitor bank C_B and followed by an inverter that restores the
// polarity. A rising edge on de_i discharges the CSI node through the tail, so the rising edge on
// de_o comes after
//     t_d = T_INTR + (R_NMOS + 1 / (g_sl + g_leak)) * C_B
// with g_leak = K_LEAK*(v_leak - VT_LEAK) and C_B = CB_BASE + cb_code*CB_STEP. This is the
// paper's R_eff = R_CAM || R_leaker + R_NMOS, t_d ~ R_eff*C_B. A matching cell (low R_CAM) gives
// the short delay t_dL, a mismatch leaves only the leaker and gives the long delay t_dH.
// The falling edge is restored through the unmodulated pull-up and takes T_INTR.
// Units: conductance mS, resistance kOhm, capacitance fF (kOhm*fF = ps), time ns (time unit of
// the model). All numeric values are this model's own, chosen so that t_dH - t_dL is about
// 0.55 ns with v_leak = 0.70 V and V_H = 0.65 V; the paper gives the structure, not the sizes.
//
// Lint note: the # delay is computed at run time, so a linter cannot prove it non-zero; by
// construction it is at least T_INTR.
module delay_element #(
  parameter int  CBW     = 3,
  parameter real T_INTR  = 0.10,  // ns
  parameter real R_NMOS  = 2.0,   // kOhm, CSI pull-down in series with the tail
  parameter real K_LEAK  = 0.02,  // mS/V
  parameter real VT_LEAK = 0.35,  // V
  parameter real CB_BASE = 4.0,   // fF
  parameter real CB_STEP = 0.5    // fF per code
) (
  input  logic           de_i,
  input  real            g_sl,
  input  real            v_leak,
  input  logic [CBW-1:0] cb_code,
  output logic           de_o
);

  real g_leak, c_b, t_fall;

  always_comb begin
    g_leak = (v_leak > VT_LEAK) ? K_LEAK * (v_leak - VT_LEAK) : 1.0e-6;
    c_b    = CB_BASE + CB_STEP * real'(cb_code);
    t_fall = T_INTR + (R_NMOS + 1.0 / (g_sl + g_leak)) * c_b / 1000.0;
  end

  initial de_o = 1'b0;

  always @(posedge de_i) de_o <= #(t_fall) 1'b1;
  always @(negedge de_i) de_o <= #(T_INTR) 1'b0;

endmodule
