// tdc: flash time-to-digital converter - the flip-flop bank that samples the DE chain output.
//
// M+1 D flip-flops all take DEC_O as data; flip-flop i is clocked by reference edge REF[i] from
// the reference delay line. When REF[i] rises it records whether DEC_O has already risen, so
// tdc_th[i] = 1 means "DEC_O arrived before REF[i]". Because the references rise in order,
// tdc_th is a thermometer code: zeros at the bottom (references that beat DEC_O), ones above.
// There is no sampling clock; each bit is captured by its own reference edge, which is what lets
// the converter resolve sub-nanosecond steps (structure as in the paper).
// rst_n asynchronously clears every flip-flop; the sequencer pulses it before each conversion
// because DEC_O stays high from the previous pulse (the clear is this design's addition).
module tdc #(
  parameter int M = 3
) (
  input  logic       dec_o,
  input  logic [M:0] ref_i,
  input  logic       rst_n,
  output logic [M:0] tdc_th
);

  for (genvar i = 0; i <= M; i++) begin : g_ff
    logic q;
    always_ff @(posedge ref_i[i] or negedge rst_n) begin
      if (!rst_n) q <= 1'b0;
      else        q <= dec_o;
    end
    assign tdc_th[i] = q;
  end

endmodule
