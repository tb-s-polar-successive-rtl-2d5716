// tb_aq -- tests the adaptive quantizer at three width reductions
// (6 -> 3 bits, 6 -> 5 bits and 5 -> 1 bit) with random vectors: each output
// keeps the input's sign and saturates its magnitude at the largest value the
// output width holds.
module tb_aq;
  localparam int L = 8;
  logic [L-1:0][5:0] in6;
  logic [L-1:0][4:0] in5;
  logic [L-1:0][2:0] o3;
  logic [L-1:0][4:0] o5;
  logic [L-1:0][0:0] o1;
  int checks = 0, failures = 0;

  aq #(.L(L), .QI(6), .QO(3)) dut3 (.llr_i(in6), .llr_o(o3));
  aq #(.L(L), .QI(6), .QO(5)) dut5 (.llr_i(in6), .llr_o(o5));
  aq #(.L(L), .QI(5), .QO(1)) dut1 (.llr_i(in5), .llr_o(o1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(int qo, int in_v, int in_q, int out_v);
    int mag, mx;
    mag = in_v % (1 << (in_q - 1));
    mx = (1 << (qo - 1)) - 1;
    if (mag > mx) mag = mx;
    checks++;
    if ((out_v >> (qo - 1)) != (in_v >> (in_q - 1)) || (out_v % (1 << (qo - 1))) != mag) begin
      failures++;
      $display("aq %0d->%0d: %0d gave %0d", in_q, qo, in_v, out_v);
    end
  endfunction

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < L; i++) begin
        in6[i] = 6'($urandom);
        in5[i] = 5'($urandom);
      end
      #1;
      for (int i = 0; i < L; i++) begin
        check(3, int'(in6[i]), 6, int'(o3[i]));
        check(5, int'(in6[i]), 6, int'(o5[i]));
        check(1, int'(in5[i]), 5, int'(o1[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
