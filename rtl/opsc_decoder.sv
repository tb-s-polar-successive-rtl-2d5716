// opsc_decoder -- unrolled, fully pipelined successive cancellation decoder
// for an (N,K) systematic polar code (default: the (1024,854) code, 5-bit
// channel LLRs).
//
// Every clock cycle the decoder accepts one codeword of N channel LLRs and,
// LATENCY cycles later, delivers the K decoded data bits of that codeword;
// a new codeword may enter every cycle, so the coded throughput is N bits per
// clock (1229 Gb/s at 1.2 GHz for N = 1024). There is no back-pressure and no
// stall: in_valid only marks which cycles carry a codeword, and out_valid
// follows it LATENCY cycles later through a reset valid pipeline.
//
// Structure: the root opsc_node (the whole decoding tree, unrolled, with
// F/G stages, adaptive quantizers, buffer memories, hard-decision shortcuts
// and partial-sum logic) and user_data_extract (one output register).
// LATENCY = opsc_pkg::node_lat(FROZEN, ...) + 1, 60 cycles at the defaults,
// the published pipeline depth.
//
// Interface conventions (this design's choices): llr_i[i] is the
// sign-magnitude LLR (bit Q-1 = 1 for negative, i.e. bit 1 more likely) of
// codeword bit i in bit-reversed order (the standard polar codeword bit
// bitrev(i)); data_o[k] is the k-th data bit (see user_data_extract).
// FROZEN defaults to the polarization-weight construction of opsc_pkg.
module opsc_decoder
  import opsc_pkg::*;
#(
  parameter int unsigned  N      = 1024,  // code length
  parameter int unsigned  K      = 854,   // data bits per codeword
  parameter int unsigned  Q      = 5,     // channel LLR width
  parameter int unsigned  N_LIM  = 32,    // largest SPC / REP shortcut
  parameter int unsigned  COMB_M = 32,    // sub-trees merged into one cycle
  parameter bit           AQ_EN  = 1'b1,  // adaptive quantization on
  parameter logic [N-1:0] FROZEN = N'(pw_frozen(N, K))
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [N-1:0][Q-1:0] llr_i,
  output logic                out_valid,
  output logic [K-1:0]        data_o
);
  localparam int unsigned LAT_CORE = node_lat(mask_t'(FROZEN), N, COMB_M, N_LIM);
  localparam int unsigned LATENCY  = LAT_CORE + 1;

  logic [N-1:0]       beta;
  logic [LATENCY-1:0] valid_pipe;

  opsc_node #(
    .M(N), .Q(Q), .NTOP(N), .POS(0), .FROZEN(FROZEN), .COMB_M(COMB_M),
    .N_LIM(N_LIM), .AQ_EN(AQ_EN), .INSIDE_COMB(1'b0)
  ) u_root (.clk(clk), .llr_i(llr_i), .beta_o(beta));

  user_data_extract #(.N(N), .K(K), .FROZEN(FROZEN)) u_extract (
    .clk(clk), .beta_i(beta), .data_o(data_o));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) valid_pipe <= '0;
    else        valid_pipe <= {valid_pipe[LATENCY-2:0], in_valid};

  assign out_valid = valid_pipe[LATENCY-1];

  // the frozen set must leave exactly K data bits
  initial assert ($countones(FROZEN) == N - K)
    else $error("opsc_decoder: FROZEN has %0d frozen bits, expected %0d",
                $countones(FROZEN), N - K);
endmodule
