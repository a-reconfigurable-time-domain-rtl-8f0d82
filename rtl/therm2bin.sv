// therm2bin: thermometer-to-binary converter of the TDC (the "Deco" block).
//
// TDC_O is the number of reference edges that came before DEC_O, i.e. the number of zeros in
// TDC_Th[M:0]; an earlier DEC_O gives a lower code, as the paper requires. Counting zeros rather
// than searching for the 1-to-0 boundary means a single bubble shifts the code by at most one.
// The value M+1 (DEC_O later than every reference) saturates to M. Combinational.
// With the paper's M = 3 (three-stage chain) OW = 2: the 2-bit TDC of the test chip.
module therm2bin #(
  parameter int M  = 3,
  localparam int OW = $clog2(M + 1)
) (
  input  logic [M:0]    th,
  output logic [OW-1:0] code
);

  localparam int ZW = $clog2(M + 2);
  logic [ZW-1:0] zeros;

  always_comb begin
    zeros = '0;
    for (int i = 0; i <= M; i++)
      zeros = zeros + (th[i] ? ZW'(0) : ZW'(1));
    code = (zeros > ZW'(M)) ? OW'(M) : OW'(zeros);
  end

endmodule
