// therm2bin_tb: exhaustive check of the thermometer-to-binary converter for M = 3 and M = 6.
// Expected value: the number of zero bits, saturated at M, counted bit by bit in the testbench.
module therm2bin_tb;
  int checks = 0, failures = 0;

  logic [3:0] th3;  logic [1:0] code3;
  logic [6:0] th6;  logic [2:0] code6;

  therm2bin #(.M(3)) dut3 (.th(th3), .code(code3));
  therm2bin #(.M(6)) dut6 (.th(th6), .code(code6));

  function automatic int ref_code(int v, int m);
    int z = 0;
    for (int i = 0; i <= m; i++) if (((v >> i) & 1) == 0) z++;
    return (z > m) ? m : z;
  endfunction

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      th3 = 4'(v); #1;
      checks++;
      if (int'(code3) != ref_code(v, 3)) begin
        failures++; $display("M=3 th=%b code=%0d exp=%0d", th3, code3, ref_code(v, 3));
      end
    end
    for (int v = 0; v < 128; v++) begin
      th6 = 7'(v); #1;
      checks++;
      if (int'(code6) != ref_code(v, 6)) begin
        failures++; $display("M=6 th=%b code=%0d exp=%0d", th6, code6, ref_code(v, 6));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
