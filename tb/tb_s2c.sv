// tb_s2c -- exhaustive test of the sign-magnitude to two's-complement
// converter for 5-bit values: every input's two's-complement output must equal
// the value (-1)^sign * magnitude worked out here.
module tb_s2c;
  localparam int Q = 5;
  logic [Q-1:0] sm, tc;
  int checks = 0, failures = 0;

  s2c #(.Q(Q)) dut (.sm_i(sm), .tc_o(tc));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << Q); v++) begin
      int expv;
      sm = Q'(v);
      #1;
      expv = (v >> (Q - 1)) ? -(v & ((1 << (Q - 1)) - 1)) : (v & ((1 << (Q - 1)) - 1));
      checks++;
      if (int'($signed(tc)) != expv) begin
        failures++;
        $display("s2c(%b) = %b, expected %0d", sm, tc, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
