// ref_delay_line_tb: for several (step, shift) bias pairs, measures when each reference edge
// REF[i] rises after DEC_I and compares with t(shift) + i*t(step), t(V) = 0.02 + 2/(0.05*(V-0.35))
// /1000 ns; also checks that REF taps fall in order after DEC_I falls.
module ref_delay_line_tb;
  localparam int M = 3;
  int checks = 0, failures = 0;
  logic dec_i = 0;
  logic [M:0] ref_o;
  real v_step = 0.5, v_shift = 0.4;
  realtime t0;
  realtime tr [M+1];

  ref_delay_line #(.M(M)) dut (.dec_i, .v_step, .v_shift, .ref_o);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real tst(real v);
    return 0.02 + 2.0 / (0.05 * (v - 0.35)) / 1000.0;
  endfunction

  for (genvar i = 0; i <= M; i++) begin : g_mon
    always @(posedge ref_o[i]) tr[i] = $realtime;
  end

  initial begin
    real steps [3] = '{0.5, 0.45, 0.75};
    real shifts[3] = '{0.4, 0.38, 0.6};
    for (int k = 0; k < 3; k++) begin
      v_step = steps[k]; v_shift = shifts[k];
      #10 dec_i = 1; t0 = $realtime;
      #20;
      for (int i = 0; i <= M; i++) begin
        real exp;
        exp = tst(v_shift) + i * tst(v_step);
        checks++;
        if (tr[i] - t0 < exp - 0.002 || tr[i] - t0 > exp + 0.002) begin
          failures++; $display("k=%0d REF[%0d] at %f, expected %f", k, i, tr[i] - t0, exp);
        end
      end
      dec_i = 0;
      #20;
      checks++;
      if (ref_o !== '0) begin failures++; $display("refs did not fall"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
