// tb_c2s -- exhaustive test of the two's-complement to sign-magnitude
// converter for 6-bit values: sign must be set exactly for negative inputs
// and the magnitude must be the absolute value (the one unrepresentable value,
// -32, clipped to 31).
module tb_c2s;
  localparam int W = 6;
  logic [W-1:0] tc, sm;
  int checks = 0, failures = 0;

  c2s #(.W(W)) dut (.tc_i(tc), .sm_o(sm));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -(1 << (W - 1)); v < (1 << (W - 1)); v++) begin
      int mag;
      tc = W'(v);
      #1;
      mag = (v < 0) ? -v : v;
      if (mag > (1 << (W - 1)) - 1) mag = (1 << (W - 1)) - 1;
      checks++;
      if (sm[W-1] != (v < 0) || int'(sm[W-2:0]) != mag) begin
        failures++;
        $display("c2s(%0d) = %b", v, sm);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
