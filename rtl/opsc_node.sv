// opsc_node -- recursive, unrolled and pipelined successive cancellation
// sub-decoder OPSC(M) for one constituent code of length M.
//
// A node receives M LLRs per clock cycle and, a fixed number of cycles later,
// returns the M-bit codeword estimate of its constituent code. One codeword
// enters every cycle; nothing stalls.
//
// If the frozen pattern FROZEN makes the node a Rate-0, Rate-1, SPC or REP code
// (SPC and REP only up to N_LIM bits), an hd_shortcut decides all bits and a
// register follows. Otherwise the node follows the published OPSC(16,9)
// structure:
//   F stage (M/2 x f2) -> AQ -> register -> left child  OPSC1(M/2)  -> z
//   buffer memory holds the M input LLRs until z is ready
//   G stage (M/2 x g2, fed z) -> AQ -> register -> right child OPSC2(M/2) -> x
//   buffer memory holds z until x is ready
//   PSUL: beta[2j] = z[j]^x[j], beta[2j+1] = x[j]
// The left child decodes the first M/2 leaves in decoding order, so it
// gets FROZEN[M/2-1:0]; the right child gets FROZEN[M-1:M/2]. When the left
// child is a Rate-0 code its codeword is known to be zero: the node then has
// no F stage, no left child and no buffers, and its G stage works with an
// all-zero feedback (the published decoder counts fewer F than G functions
// for the same reason).
//
// Register placement (this design's reading of register reduction/balancing):
// a non-shortcut node of length <= COMB_M is computed in one clock cycle, all
// its F, G and shortcut stages merged into one combinational path with a
// register at its output; larger nodes register the F and G outputs. The
// latency of a registered node is therefore 1 for a shortcut or a merged
// node, 1 + L(right) when the left child is Rate-0, and
// 2 + L(left) + L(right) otherwise (opsc_pkg::node_lat); the buffers are
// sized from it. The published decoder places its registers from timing
// results that are not available; with the default code and COMB_M = 32 this
// rule gives 59 core stages, and with the output register of the decoder the
// published total of 60.
//
// LLR widths: a node fed Q-bit LLRs hands its children QL and QR bits chosen by
// opsc_pkg::aq_width (the published adaptive quantization tree for 128 <= M
// <= 1024 of the (1024,854) code, otherwise the parent's width).
//
// INSIDE_COMB = 1 marks a node inside a merged combinational sub-tree: it has
// no registers at all. Recursion ends at shortcut nodes (every length-1 node
// is Rate-0 or Rate-1).
//
// Lint note: when this module is linted on its own as the top of a design,
// the linter reports z and x of the top instance as undriven, because it does
// not follow the self-instantiation there. Instantiated under opsc_decoder,
// or simulated, both are driven by the child sub-decoders.
module opsc_node
  import opsc_pkg::*;
#(
  parameter int unsigned M           = 1024,  // constituent code length
  parameter int unsigned Q           = 5,     // input LLR width
  parameter int unsigned NTOP        = 1024,  // length of the whole code
  parameter int unsigned POS         = 0,     // first leaf of this node
  parameter logic [M-1:0] FROZEN     = M'(pw_frozen(M, (M * 854) / 1024)),
  parameter int unsigned COMB_M      = 32,    // merge nodes up to this length
  parameter int unsigned N_LIM       = 32,    // largest SPC / REP shortcut
  parameter bit          AQ_EN       = 1'b1,  // apply the adaptive quantization tree
  parameter bit          INSIDE_COMB = 1'b0   // part of a merged sub-tree
) (
  input  logic                clk,
  input  logic [M-1:0][Q-1:0] llr_i,
  output logic [M-1:0]        beta_o
);
  localparam node_kind_e KIND      = node_kind(mask_t'(FROZEN), M, N_LIM);
  localparam bit         LEAF      = (KIND != NK_NONE);
  localparam bit         COMB_ROOT = !INSIDE_COMB && !LEAF && (M <= COMB_M);

  if (LEAF) begin : g_leaf
    logic [M-1:0] hd;

    hd_shortcut #(.M(M), .Q(Q), .KIND(KIND)) u_hd (.llr_i(llr_i), .beta_o(hd));

    delay_buffer #(.WIDTH(M), .DEPTH(INSIDE_COMB ? 0 : 1)) u_out_reg (
      .clk(clk), .d_i(hd), .q_o(beta_o));

  end else begin : g_split
    localparam int unsigned H     = M / 2;
    localparam bit          CC    = INSIDE_COMB || COMB_ROOT;
    localparam int unsigned QL    = aq_width(NTOP, M, POS, Q, 1'b0, AQ_EN);
    localparam int unsigned QR    = aq_width(NTOP, M, POS, Q, 1'b1, AQ_EN);
    localparam logic [H-1:0] FRZ_L = FROZEN[H-1:0];
    localparam logic [H-1:0] FRZ_R = FROZEN[M-1:H];
    localparam int unsigned STAGE = CC ? 0 : 1;
    localparam int unsigned LAT_L = CC ? 0 : node_lat(mask_t'(FRZ_L), H, COMB_M, N_LIM);
    // (LAT_L is unused when the left child is Rate-0)
    localparam int unsigned LAT_R = CC ? 0 : node_lat(mask_t'(FRZ_R), H, COMB_M, N_LIM);

    localparam bit          LEFT_R0 = (node_kind(mask_t'(FRZ_L), H, N_LIM) == NK_R0);

    logic [M-1:0][Q-1:0]  llr_d;
    logic [H-1:0][Q:0]    g_out;
    logic [H-1:0][QR-1:0] g_q, l_right;
    logic [H-1:0]         z, z_d, x;
    logic [M-1:0]         beta;

    if (LEFT_R0) begin : g_left_r0
      // The left sub-code is all frozen: its codeword is known to be zero, so
      // there is no F stage and no left sub-decoder, and G starts at once
      // with an all-zero feedback.
      assign z     = '0;
      assign llr_d = llr_i;
      assign z_d   = '0;
    end else begin : g_left
      logic [H-1:0][Q-1:0]  f_out;
      logic [H-1:0][QL-1:0] f_q, l_left;

      // F stage, quantizer and pipeline register
      for (genvar j = 0; j < H; j++) begin : g_f
        f2 #(.Q(Q)) u_f2 (.l1_i(llr_i[2*j]), .l2_i(llr_i[2*j+1]), .l3_o(f_out[j]));
      end
      aq #(.L(H), .QI(Q), .QO(QL)) u_aq_f (.llr_i(f_out), .llr_o(f_q));
      delay_buffer #(.WIDTH(H * QL), .DEPTH(STAGE)) u_f_reg (
        .clk(clk), .d_i(f_q), .q_o(l_left));

      opsc_node #(
        .M(H), .Q(QL), .NTOP(NTOP), .POS(POS), .FROZEN(FRZ_L), .COMB_M(COMB_M),
        .N_LIM(N_LIM), .AQ_EN(AQ_EN), .INSIDE_COMB(CC)
      ) u_left (.clk(clk), .llr_i(l_left), .beta_o(z));

      // LLR buffer memory: bridges the F register and the left sub-decoder
      delay_buffer #(.WIDTH(M * Q), .DEPTH(STAGE + LAT_L)) u_llr_buf (
        .clk(clk), .d_i(llr_i), .q_o(llr_d));

      // partial-sum buffer memory: bridges the G register and the right sub-decoder
      delay_buffer #(.WIDTH(H), .DEPTH(STAGE + LAT_R)) u_psul_buf (
        .clk(clk), .d_i(z), .q_o(z_d));
    end

    // G stage, quantizer and pipeline register
    for (genvar j = 0; j < H; j++) begin : g_g
      g2 #(.Q(Q)) u_g2 (.l1_i(llr_d[2*j]), .l2_i(llr_d[2*j+1]), .z_i(z[j]), .l3_o(g_out[j]));
    end
    aq #(.L(H), .QI(Q + 1), .QO(QR)) u_aq_g (.llr_i(g_out), .llr_o(g_q));
    delay_buffer #(.WIDTH(H * QR), .DEPTH(STAGE)) u_g_reg (
      .clk(clk), .d_i(g_q), .q_o(l_right));

    opsc_node #(
      .M(H), .Q(QR), .NTOP(NTOP), .POS(POS + H), .FROZEN(FRZ_R), .COMB_M(COMB_M),
      .N_LIM(N_LIM), .AQ_EN(AQ_EN), .INSIDE_COMB(CC)
    ) u_right (.clk(clk), .llr_i(l_right), .beta_o(x));

    psul #(.H(H)) u_psul (.z_i(z_d), .x_i(x), .beta_o(beta));

    // a merged sub-tree ends in one register
    delay_buffer #(.WIDTH(M), .DEPTH(COMB_ROOT ? 1 : 0)) u_out_reg (
      .clk(clk), .d_i(beta), .q_o(beta_o));
  end
endmodule
