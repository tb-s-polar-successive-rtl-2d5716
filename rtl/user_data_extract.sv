// user_data_extract -- picks the K data bits out of the decoded codeword.
//
// The code is systematic: the data bits appear unchanged in the codeword, at
// the positions of the non-frozen leaves. Because the decoder keeps its
// codeword in bit-reversed order, data bit k (k-th non-frozen leaf i, counted
// in increasing i) is codeword bit bitrev(i). The selection is fixed at
// elaboration from FROZEN; the result is registered, so this block adds one
// clock cycle. Bit 0 of data_o is the data bit of the lowest data leaf.
module user_data_extract
  import opsc_pkg::*;
#(
  parameter int unsigned  N      = 1024,
  parameter int unsigned  K      = 854,
  parameter logic [N-1:0] FROZEN = N'(pw_frozen(N, K))
) (
  input  logic         clk,
  input  logic [N-1:0] beta_i,   // codeword estimate, bit-reversed order
  output logic [K-1:0] data_o    // decoded user data
);
  localparam int unsigned LOGN = $clog2(N);

  typedef logic [K-1:0][LOGN-1:0] map_t;

  // MAP[k] = codeword position of data bit k
  function automatic map_t data_map();
    map_t        mp;
    int unsigned k;
    mp = '0;
    k = 0;
    for (int unsigned i = 0; i < N; i++)
      if (!FROZEN[i] && k < K) begin
        mp[k] = LOGN'(bitrev(i, LOGN));
        k++;
      end
    return mp;
  endfunction

  localparam map_t MAP = data_map();

  logic [K-1:0] data;

  for (genvar k = 0; k < K; k++) begin : g_sel
    assign data[k] = beta_i[MAP[k]];
  end

  always_ff @(posedge clk) data_o <= data;
endmodule
