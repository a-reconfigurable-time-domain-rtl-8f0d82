// de_chain_tb: sets per-stage tail conductances for every fast/slow pattern of a 3-stage chain
// and checks the total delay DEC_I -> DEC_O against the sum of the per-stage delays
// T_INTR + (R_NMOS + 1/(g_j + g_leak)) * C_B worked out here, and that the chain delay grows
// by the same step for each extra slow stage.
module de_chain_tb;
  int checks = 0, failures = 0;
  logic dec_i = 0, dec_o;
  real g_sl [3];
  real v_leak = 0.70;
  logic [2:0] cb = 3'd4;

  de_chain #(.N_COLS(3)) dut (.dec_i, .g_sl, .v_leak, .cb_code(cb), .dec_o);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real stage(real g);
    return 0.10 + (2.0 + 1.0 / (g + 0.02 * (v_leak - 0.35))) * (4.0 + 0.5 * 4) / 1000.0;
  endfunction

  initial begin
    real td, exp, tprev;
    realtime t0;
    for (int p = 0; p < 8; p++) begin
      exp = 0.0;
      for (int j = 0; j < 3; j++) begin
        g_sl[j] = p[j] ? 0.0175 : 2e-6;
        exp += stage(g_sl[j]);
      end
      #5;
      dec_i = 1; t0 = $realtime;
      @(posedge dec_o);
      td = $realtime - t0;
      checks++;
      if (td < exp - 0.003 || td > exp + 0.003) begin
        failures++; $display("pattern %b: %f ns, expected %f", p[2:0], td, exp);
      end
      #5 dec_i = 0;
      #5;
    end
    // Step per slow stage is constant: compare 0, 1, 2, 3 slow stages.
    tprev = 0.0;
    for (int s = 0; s <= 3; s++) begin
      for (int j = 0; j < 3; j++) g_sl[j] = (j < s) ? 2e-6 : 0.0175;
      #5; dec_i = 1; t0 = $realtime;
      @(posedge dec_o); td = $realtime - t0;
      if (s > 0) begin
        checks++;
        if ((td - tprev) < stage(2e-6) - stage(0.0175) - 0.003 || (td - tprev) > stage(2e-6) - stage(0.0175) + 0.003) begin
          failures++; $display("step %0d: %f", s, td - tprev);
        end
      end
      tprev = td;
      #5 dec_i = 0; #5;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
