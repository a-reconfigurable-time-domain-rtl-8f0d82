// result_decoder: turns a captured TDC result into the answer of the selected operation.
//
// Reference alignment used throughout this design: the reference delay line is biased so that
// REF[i] falls between the arrival time of "i slow stages" and "i+1 slow stages"
// (T(i) = i*t_dH + (M-i)*t_dL). Then TDC_Th[i] = 1 exactly when at most i stages were slow, and
// TDC_O (the number of zeros) is the number of slow stages.
//   XOR-MAC  : a slow stage is a mismatch, so MAC = matches - mismatches = M - 2*TDC_O
//              (the paper's code table 00:+3, 01:+1, 10:-1, 11:-3 for M = 3).
//   AND-MAC  : a fast stage is X AND W = 1, so MAC = M - TDC_O (00:+3, 01:+2, 10:+1, 11:0).
//   logic AND over k selected columns: 1 only if all k are fast, i.e. at most M-k slow stages:
//              out = TDC_Th[M-k] (the paper's "REF[M-k] stage").
//   logic OR : 0 only if every stage is slow (arrival at T(M)): out = TDC_Th[M-1]. The paper
//              names the REF[M] tap; with the alignment above TDC_Th[M] is 1 for every input,
//              so this design reads the tap one step earlier (see the design notes).
//   full adder (three selected columns, X AND W per column): n = M - TDC_O fast stages,
//              sum = n[0], carry = (n >= 2). How sum and carry are read out is this design's
//              choice; the paper states only that the adder runs like AND-MAC.
//   overrange: TDC_Th[M] = 0, DEC_O later than the last reference (this design's flag).
// Outputs for modes they do not belong to are 0. Combinational.
module result_decoder
  import tdimc_pkg::*;
#(
  parameter int M  = 3,
  localparam int OW = $clog2(M + 1),
  localparam int KW = $clog2(M + 1)
) (
  input  mode_e               mode,
  input  logic [M-1:0]        col_mask,
  input  logic [M:0]          tdc_th,
  input  logic [OW-1:0]       tdc_o,
  output logic signed [OW:0]  mac_val,
  output logic                logic_out,
  output logic                fa_sum,
  output logic                fa_carry,
  output logic                overrange
);

  logic [KW-1:0] k;
  logic [OW:0]   n_fast;

  always_comb begin
    k = '0;
    for (int j = 0; j < M; j++) k = k + KW'(col_mask[j]);
    n_fast    = (OW + 1)'(M) - {1'b0, tdc_o};
    mac_val   = '0;
    logic_out = 1'b0;
    fa_sum    = 1'b0;
    fa_carry  = 1'b0;
    overrange = ~tdc_th[M];
    unique case (mode)
      MODE_XOR_MAC:   mac_val = signed'((OW + 1)'(M) - ({1'b0, tdc_o} << 1));
      MODE_AND_MAC:   mac_val = signed'(n_fast);
      MODE_LOGIC_AND: logic_out = tdc_th[M - int'(k)];
      MODE_LOGIC_OR:  logic_out = tdc_th[M - 1];
      MODE_FULL_ADD: begin
        fa_sum   = n_fast[0];
        fa_carry = (n_fast >= 2);
      end
      default: ;
    endcase
  end

endmodule
