// tb_f2 -- exhaustive test of F2 on all pairs of 5-bit sign-magnitude LLRs:
// sign = XOR of the signs, magnitude = the smaller magnitude.
module tb_f2;
  localparam int Q = 5;
  logic [Q-1:0] a, b, o;
  int checks = 0, failures = 0;

  f2 #(.Q(Q)) dut (.l1_i(a), .l2_i(b), .l3_o(o));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 32; x++)
      for (int y = 0; y < 32; y++) begin
        int ma, mb;
        a = Q'(x);
        b = Q'(y);
        #1;
        ma = x % 16;
        mb = y % 16;
        checks++;
        if (o[4] != ((x / 16) ^ (y / 16)) || int'(o[3:0]) != ((ma < mb) ? ma : mb)) begin
          failures++;
          $display("F2(%b,%b) = %b", a, b, o);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
