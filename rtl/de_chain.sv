// de_chain: behavioural model of the delay-element chain (one DE per array column).
//
// The input pulse DEC_I enters stage 0; stage j's output drives stage j+1; the last output is
// DEC_O. Stage j's tail is source line SL_j of the CAM array, so with one row selected the total
// delay T_D = sum_j t_d,j encodes the row's multiply-accumulate result: every matching stage
// contributes t_dL, every other stage t_dH. All stages share the leaker bias and the
// capacitor-bank code (sharing one code is this design's choice). Timing: the rising edge of
// dec_o follows dec_i by T_D; the falling edge by N_COLS*T_INTR.
module de_chain #(
  parameter int N_COLS = 3,
  parameter int CBW    = 3
) (
  input  logic           dec_i,
  input  real            g_sl [N_COLS],
  input  real            v_leak,
  input  logic [CBW-1:0] cb_code,
  output logic           dec_o
);

  logic [N_COLS:0] node;
  assign node[0] = dec_i;

  for (genvar j = 0; j < N_COLS; j++) begin : g_stage
    delay_element #(.CBW(CBW)) u_de (
      .de_i   (node[j]),
      .g_sl   (g_sl[j]),
      .v_leak (v_leak),
      .cb_code(cb_code),
      .de_o   (node[j+1])
    );
  end

  assign dec_o = node[N_COLS];

endmodule
