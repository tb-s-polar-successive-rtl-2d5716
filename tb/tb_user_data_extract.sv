// tb_user_data_extract -- systematically encodes random data for a (64,40)
// code (encode, re-freeze, encode), puts the codeword in bit-reversed order
// and checks that the block returns the data one clock cycle later.
module tb_user_data_extract;
  import opsc_pkg::*;
  localparam int N = 64, K = 40, LOGN = 6;
  logic         clk = 1'b0;
  logic [N-1:0] beta;
  logic [K-1:0] data;
  logic [N-1:0] frozen;
  int checks = 0, failures = 0;

  user_data_extract #(.N(N), .K(K)) dut (.clk(clk), .beta_i(beta), .data_o(data));

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void transform(inout bit v[N]);
    for (int s = 1; s < N; s *= 2)
      for (int i = 0; i < N; i++)
        if ((i & s) == 0) v[i] ^= v[i+s];
  endfunction

  function automatic int brev(int i);
    int r = 0;
    for (int b = 0; b < LOGN; b++) if ((i >> b) & 1) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  initial begin
    frozen = N'(pw_frozen(N, K));
    for (int t = 0; t < 100; t++) begin
      logic [K-1:0] d;
      bit u[N];
      int k;
      d = K'({$urandom, $urandom});
      k = 0;
      for (int i = 0; i < N; i++) begin
        u[i] = frozen[i] ? 1'b0 : d[k];
        if (!frozen[i]) k++;
      end
      transform(u);
      for (int i = 0; i < N; i++) if (frozen[i]) u[i] = 0;
      transform(u);
      @(negedge clk);
      for (int i = 0; i < N; i++) beta[i] = u[brev(i)];
      @(negedge clk);
      checks++;
      if (data !== d) begin
        failures++;
        $display("got %h expected %h", data, d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
