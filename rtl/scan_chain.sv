// scan_chain: serial configuration register of the macro.
//
// The test chip has few pads, so its settings are loaded serially. While scan_en is high the
// chain shifts one bit per clock, scan_in entering at bit 0 and the old bit WIDTH-1 leaving on
// scan_out (so the word is sent most significant bit first). A high update copies the shift
// register into the shadow register cfg_q in the same clock edge, so the configuration seen by
// the rest of the macro never shows half-shifted values. If scan_en and update are high in the
// same cycle, cfg_q takes the value from before that edge's shift. Reset clears both registers.
// The paper shows a scan chain on the test chip but not its contents or protocol; this
// shift/update scheme and the field layout (defined where it is instantiated) are this design's.
module scan_chain #(
  parameter int WIDTH = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             scan_en,
  input  logic             scan_in,
  input  logic             update,
  output logic             scan_out,
  output logic [WIDTH-1:0] cfg_q
);

  logic [WIDTH-1:0] sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh    <= '0;
      cfg_q <= '0;
    end else begin
      if (scan_en) sh <= {sh[WIDTH-2:0], scan_in};
      if (update)  cfg_q <= sh;
    end
  end

  assign scan_out = sh[WIDTH-1];

endmodule
