// tb_opsc_node -- streams one random codeword per clock cycle through a
// length-64 sub-decoder with 32 frozen bits (polarization-weight set), nodes
// of up to 8 bits merged into one cycle and shortcuts up to 8 bits, so that
// the tree contains registered F/G stages, merged sub-trees and all four
// shortcut classes. The LLRs carry the codeword's signs with random
// magnitudes (noiseless channel), so the output must be the codeword itself.
// The latency must be 20 cycles: worked out by hand from the tree with the
// rule "shortcut or merged node = 1, node with a Rate-0 left child =
// 1 + its right child, other node = 2 + its children".
module tb_opsc_node;
  import opsc_pkg::*;
  localparam int M = 64, K = 32, Q = 5, LOGN = 6, LAT = 20;
  logic                clk = 1'b0;
  logic [M-1:0][Q-1:0] llr;
  logic [M-1:0]        beta;
  logic [M-1:0]        frozen;
  logic [M-1:0]        sent [$];
  int checks = 0, failures = 0;

  opsc_node #(
    .M(M), .Q(Q), .NTOP(M), .POS(0), .FROZEN(M'(pw_frozen(64, 32))), .COMB_M(8),
    .N_LIM(8), .AQ_EN(1'b1), .INSIDE_COMB(1'b0)
  ) dut (.clk(clk), .llr_i(llr), .beta_o(beta));

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int brev(int i);
    int r = 0;
    for (int b = 0; b < LOGN; b++) if ((i >> b) & 1) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  initial begin
    frozen = M'(pw_frozen(64, 32));
    for (int t = 0; t < 300 + LAT; t++) begin
      logic [M-1:0] cw;
      bit u[M];
      @(negedge clk);
      // the output now belongs to the codeword sent LAT cycles ago
      if (t >= LAT) begin
        checks++;
        if (beta !== sent[LAT-1]) begin
          failures++;
          if (failures < 4) $display("t=%0d got %h expected %h", t, beta, sent[LAT-1]);
        end
        void'(sent.pop_back());
      end
      for (int i = 0; i < M; i++) u[i] = frozen[i] ? 1'b0 : 1'($urandom);
      for (int s = 1; s < M; s *= 2)
        for (int i = 0; i < M; i++)
          if ((i & s) == 0) u[i] ^= u[i+s];
      for (int i = 0; i < M; i++) begin
        cw[i] = u[brev(i)];
        llr[i] = {cw[i], 4'($urandom_range(15, 1))};
      end
      sent.push_front(cw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
