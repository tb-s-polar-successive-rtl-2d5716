// tb_g2 -- exhaustive test of G2 on all pairs of 5-bit sign-magnitude LLRs
// and both feedback values: the 6-bit sign-magnitude output must equal
// (1-2z)*l1 + l2 computed here with integers.
module tb_g2;
  localparam int Q = 5;
  logic [Q-1:0] a, b;
  logic         z;
  logic [Q:0]   o;
  int checks = 0, failures = 0;

  g2 #(.Q(Q)) dut (.l1_i(a), .l2_i(b), .z_i(z), .l3_o(o));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 32; x++)
      for (int y = 0; y < 32; y++)
        for (int zz = 0; zz < 2; zz++) begin
          int v1, v2, r, got;
          a = Q'(x);
          b = Q'(y);
          z = zz[0];
          #1;
          v1 = (x / 16) ? -(x % 16) : x % 16;
          v2 = (y / 16) ? -(y % 16) : y % 16;
          r = (1 - 2 * zz) * v1 + v2;
          got = o[Q] ? -int'(o[Q-1:0]) : int'(o[Q-1:0]);
          checks++;
          if (got != r || (r == 0 && o[Q])) begin
            failures++;
            $display("G2(%0d,%0d,%0d) = %b, expected %0d", v1, v2, zz, o, r);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
