// scan_chain_tb: shifts random words into the scan chain, checks that the shadow register only
// changes on update, that it then holds the word sent MSB first, and that scan_out returns the
// previously shifted word bit by bit.
module scan_chain_tb;
  localparam int W = 22;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, update = 0, scan_out;
  logic [W-1:0] cfg_q;

  scan_chain #(.WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [W-1:0] word, prev, outw;
    prev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(cfg_q, '0, "after reset");
    for (int t = 0; t < 20; t++) begin
      word = W'({$urandom, $urandom});
      outw = '0;
      scan_en = 1;
      for (int b = W - 1; b >= 0; b--) begin
        scan_in = word[b];
        outw = {outw[W-2:0], scan_out};
        @(negedge clk);
      end
      scan_en = 0;
      chk(outw, prev, "scan_out");
      chk(cfg_q, prev, "no update yet");
      update = 1; @(negedge clk); update = 0;
      chk(cfg_q, word, "after update");
      prev = word;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
