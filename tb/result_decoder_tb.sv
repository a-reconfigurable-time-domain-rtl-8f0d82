// result_decoder_tb: for every mode, column mask and number of slow stages s = 0..M+1 (M = 3),
// builds the TDC thermometer code the converter would see (TDC_Th[i] = 1 when s <= i), its binary
// code, and checks the decoded answer against values derived from the operations themselves:
// XOR-MAC = matches - mismatches, AND-MAC = number of fast stages, AND_k = all k selected fast,
// OR_k = not all stages slow, full adder = binary sum of the fast count, overrange = s > M.
module result_decoder_tb;
  import tdimc_pkg::*;
  localparam int M = 3;
  int checks = 0, failures = 0;

  mode_e mode; logic [M-1:0] mask; logic [M:0] th; logic [1:0] code;
  logic signed [2:0] mac; logic lo, fs, fc, ovr;

  result_decoder #(.M(M)) dut (.mode, .col_mask(mask), .tdc_th(th), .tdc_o(code),
                               .mac_val(mac), .logic_out(lo), .fa_sum(fs), .fa_carry(fc), .overrange(ovr));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s mode=%s mask=%b th=%b: got %0d exp %0d", what, mode.name(), mask, th, got, exp);
    end
  endtask

  initial begin
    for (int md = 0; md <= 5; md++)
      for (int mv = 0; mv < 8; mv++)
        for (int s = 0; s <= M + 1; s++) begin
          int k, nslow, nfast;
          mode = mode_e'(md); mask = 3'(mv);
          for (int i = 0; i <= M; i++) th[i] = (s <= i);
          nslow = (s > M) ? M : s;
          code = 2'(nslow);
          nfast = M - nslow;
          k = $countones(mask);
          #1;
          chk(int'(ovr), (s > M) ? 1 : 0, "overrange");
          case (mode)
            MODE_XOR_MAC: chk(int'(mac), nfast - nslow, "xor mac");
            MODE_AND_MAC: chk(int'(mac), nfast, "and mac");
            MODE_LOGIC_AND: chk(int'(lo), (s <= M - k) ? 1 : 0, "and_k");
            MODE_LOGIC_OR: chk(int'(lo), (s < M) ? 1 : 0, "or_k");
            MODE_FULL_ADD: begin
              chk(int'(fs), nfast % 2, "fa sum");
              chk(int'(fc), nfast / 2, "fa carry");
            end
            default: chk(int'(mac) + int'(lo) + int'(fs) + int'(fc), 0, "idle outputs");
          endcase
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
