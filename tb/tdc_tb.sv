// tdc_tb: drives the flash TDC with reference edges 0.5 ns apart and a DEC_O edge placed in each
// interval in turn (before REF[0], between REF[j-1] and REF[j], after REF[M]); the expected
// thermometer code has a 1 exactly for the references that rose after DEC_O. Also checks the
// asynchronous clear and that a falling DEC_O after capture does not change the result.
module tdc_tb;
  localparam int M = 3;
  int checks = 0, failures = 0;
  logic dec_o = 0, rst_n = 1;
  logic [M:0] ref_i = '0, th;

  tdc #(.M(M)) dut (.dec_o, .ref_i, .rst_n, .tdc_th(th));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 2; round++)
      for (int j = 0; j <= M + 1; j++) begin
        logic [M:0] exp;
        dec_o = 0; ref_i = '0; #1; rst_n = 0; #1;
        checks++;
        if (th !== '0) begin failures++; $display("clear failed: %b", th); end
        rst_n = 1; #1;
        fork
          begin #(0.25 + 0.5 * j); dec_o = 1; end
          for (int i = 0; i <= M; i++) begin
            automatic int ii = i;
            fork begin #(0.5 + 0.5 * ii); ref_i[ii] = 1; end join_none
          end
        join
        #5;
        for (int i = 0; i <= M; i++) exp[i] = (i >= j);
        checks++;
        if (th !== exp) begin failures++; $display("j=%0d th=%b exp=%b", j, th, exp); end
        dec_o = 0; #1;
        checks++;
        if (th !== exp) begin failures++; $display("changed after DEC_O fell"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
