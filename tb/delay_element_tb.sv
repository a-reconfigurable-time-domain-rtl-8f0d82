// delay_element_tb: applies rising and falling edges to one delay element for several tail
// conductances (matching LVT cell, mismatch/leaker only, intermediate), leaker biases and
// capacitor-bank codes, and compares the measured edge delays with
// t_d = T_INTR + (R_NMOS + 1/(g_sl + g_leak)) * C_B (rising) and T_INTR (falling), evaluated here
// with the default device constants. Also checks that a cell that conducts is faster than the
// leaker-only case (t_dL < t_dH).
module delay_element_tb;
  int checks = 0, failures = 0;
  logic de_i = 0, de_o;
  real g_sl = 0.0, v_leak = 0.70;
  logic [2:0] cb = 3'd4;
  realtime t0, t1;

  delay_element dut (.de_i, .g_sl, .v_leak, .cb_code(cb), .de_o);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real expected(real g, real vl, int code);
    real gl = 0.02 * (vl - 0.35);
    return 0.10 + (2.0 + 1.0 / (g + gl)) * (4.0 + 0.5 * code) / 1000.0;
  endfunction

  task automatic measure(real g, real vl, int code, output real td);
    g_sl = g; v_leak = vl; cb = 3'(code);
    #5;
    de_i = 1; t0 = $realtime;
    @(posedge de_o); t1 = $realtime;
    td = t1 - t0;
    checks++;
    if (td < expected(g, vl, code) - 0.002 || td > expected(g, vl, code) + 0.002) begin
      failures++; $display("rise g=%f vl=%f cb=%0d: %f ns, expected %f", g, vl, code, td, expected(g, vl, code));
    end
    #5;
    de_i = 0; t0 = $realtime;
    @(negedge de_o); t1 = $realtime;
    checks++;
    if (t1 - t0 < 0.099 || t1 - t0 > 0.101) begin failures++; $display("fall %f", t1 - t0); end
  endtask

  initial begin
    real tl, th, td;
    measure(0.0175, 0.70, 4, tl);   // LVT device, 0.35 V overdrive
    measure(2e-6,   0.70, 4, th);   // both devices off: leaker only
    checks++;
    if (!(tl < th - 0.3)) begin failures++; $display("t_dL %f not well below t_dH %f", tl, th); end
    measure(0.005, 0.70, 4, td);
    measure(2e-6, 0.80, 4, td);
    measure(2e-6, 0.70, 0, td);
    measure(2e-6, 0.70, 7, td);
    measure(0.0175, 0.60, 2, td);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
