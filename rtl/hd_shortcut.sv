// hd_shortcut -- hard-decision making for a constituent code of length M.
//
// When the frozen pattern of a sub-code makes it easy to decode, the decoder
// stops splitting it with F and G functions and decides all M codeword bits
// at once. KIND selects one of the four published shortcuts:
//   NK_R0  Rate-0 (all bits frozen): every bit is 0.
//   NK_R1  Rate-1 (no bit frozen): threshold, bit = sign of its LLR
//          (0 for positive, 1 for negative).
//   NK_SPC single parity check (only the first leaf frozen): Wagner decoding,
//          threshold every LLR, and if the parity of the decisions is odd flip
//          the bit whose LLR has the smallest magnitude (lowest index wins a
//          tie, a choice of this design).
//   NK_REP repetition (only the last leaf not frozen): MAP decoding, add all
//          M LLRs and give every bit the sign of the sum (a zero sum decides 0,
//          a choice of this design).
// The output is the codeword estimate of the sub-code (what the partial-sum
// logic consumes), in the same bit-reversed order as the LLRs. Purely
// combinational; opsc_node adds the register behind it.
module hd_shortcut
  import opsc_pkg::*;
#(
  parameter int unsigned M    = 32,       // constituent code length
  parameter int unsigned Q    = 5,        // LLR width (sign-magnitude)
  parameter node_kind_e  KIND = NK_SPC    // which shortcut
) (
  input  logic [M-1:0][Q-1:0] llr_i,
  output logic [M-1:0]        beta_o
);
  localparam logic [Q-1:0] MAG_MASK = (Q'(1) << (Q - 1)) - Q'(1);
  localparam int unsigned  SW       = Q + $clog2(M) + 1;   // REP sum width

  if (KIND == NK_R0) begin : g_r0
    assign beta_o = '0;
  end else if (KIND == NK_R1) begin : g_r1
    always_comb
      for (int unsigned i = 0; i < M; i++) beta_o[i] = llr_i[i][Q-1];
  end else if (KIND == NK_SPC) begin : g_spc
    logic [Q-1:0]          min_mag;
    logic [$clog2(M)-1:0]  min_idx;
    logic                  parity;
    logic [M-1:0]          hard;

    always_comb begin
      for (int unsigned i = 0; i < M; i++) hard[i] = llr_i[i][Q-1];
      min_mag = llr_i[0] & MAG_MASK;
      min_idx = '0;
      for (int unsigned i = 1; i < M; i++)
        if ((llr_i[i] & MAG_MASK) < min_mag) begin
          min_mag = llr_i[i] & MAG_MASK;
          min_idx = ($clog2(M))'(i);
        end
      parity = ^hard;
      beta_o = hard;
      beta_o[min_idx] = hard[min_idx] ^ parity;
    end
  end else if (KIND == NK_REP) begin : g_rep
    logic signed [SW-1:0] sum;

    always_comb begin
      sum = '0;
      for (int unsigned i = 0; i < M; i++)
        if (llr_i[i][Q-1]) sum = sum - SW'(llr_i[i] & MAG_MASK);
        else               sum = sum + SW'(llr_i[i] & MAG_MASK);
      beta_o = {M{sum < 0}};
    end
  end else begin : g_bad
    $error("hd_shortcut: KIND must be a shortcut class");
  end
endmodule
