// ref_delay_line: behavioural model of the tunable reference delay line (RDL) of the TDC.
//
// Started by the same DEC_I pulse as the DE chain, it produces M+1 reference edges REF[M:0].
// The first stage is biased by 'shift' and sets the phase of REF[0]; every following stage is
// biased by 'step' and sets the spacing of the references (the TDC's time resolution). Both are
// analog bias voltages. Stage delay model (this design's own, of a current-starved stage):
//     t(V) = RDL_T0 + RDL_C / (RDL_K * (V - RDL_VT))   [ns, with kOhm*fF = ps]
// so REF[0] = DEC_I + t(v_shift) and REF[i] = REF[i-1] + t(v_step). Both pulse edges are delayed
// alike. Biases at or below RDL_VT are clamped 10 mV above it.
//
// Lint note: the # delays are computed at run time, so a linter cannot prove them non-zero; by
// construction each is at least RDL_T0.
module ref_delay_line #(
  parameter int  M      = 3,
  parameter real RDL_T0 = 0.02,  // ns
  parameter real RDL_C  = 2.0,   // fF
  parameter real RDL_K  = 0.05,  // mS/V
  parameter real RDL_VT = 0.35   // V
) (
  input  logic       dec_i,
  input  real        v_step,
  input  real        v_shift,
  output logic [M:0] ref_o
);

  real t_step, t_shift;

  function automatic real t_stage(real v);
    real ov;
    ov = (v > RDL_VT + 0.01) ? (v - RDL_VT) : 0.01;
    return RDL_T0 + RDL_C / (RDL_K * ov) / 1000.0;
  endfunction

  always_comb begin
    t_step  = t_stage(v_step);
    t_shift = t_stage(v_shift);
  end

  initial ref_o = '0;

  always @(dec_i) ref_o[0] <= #(t_shift) dec_i;

  for (genvar i = 1; i <= M; i++) begin : g_tap
    always @(ref_o[i-1]) ref_o[i] <= #(t_step) ref_o[i-1];
  end

endmodule
