// aq -- adaptive LLR quantizer (AQ) between an F or G stage and a sub-decoder.
//
// Reduces a vector of L sign-magnitude LLRs from QI to QO bits. The sign is
// kept; the magnitude saturates at the largest QO-bit magnitude, 2^(QO-1)-1.
// With QO = 1 only the sign survives, which is all a Rate-1 constituent code
// needs. With QO >= QI the values pass unchanged (zero-extended magnitude).
// How many bits each sub-decoder gets follows the published AQ tree of the
// (1024,854) code (see opsc_pkg::aq_width); the use of saturation rather
// than, say, dropping low bits is this design's choice. Purely combinational.
module aq #(
  parameter int unsigned L  = 512,  // LLRs in the vector
  parameter int unsigned QI = 6,    // input width (a G2 output is Q+1 bits)
  parameter int unsigned QO = 5     // output width
) (
  input  logic [L-1:0][QI-1:0] llr_i,
  output logic [L-1:0][QO-1:0] llr_o
);
  localparam int unsigned QW = (QI > QO) ? QI : QO;
  localparam logic [QW-1:0] IN_MASK = (QW'(1) << (QI - 1)) - QW'(1);
  localparam logic [QW-1:0] OUT_MAX = (QW'(1) << (QO - 1)) - QW'(1);

  always_comb begin
    for (int unsigned i = 0; i < L; i++) begin
      logic [QW-1:0] mag;
      mag = QW'(llr_i[i]) & IN_MASK;
      if (mag > OUT_MAX) mag = OUT_MAX;
      llr_o[i] = (QO'(llr_i[i][QI-1]) << (QO - 1)) | QO'(mag);
    end
  end
endmodule
