// tb_psul -- random test of the partial-sum update logic: every parent
// codeword must equal the polar combination of its two halves,
// beta[2j] = z[j] ^ x[j] and beta[2j+1] = x[j].
module tb_psul;
  localparam int H = 16;
  logic [H-1:0]   z, x;
  logic [2*H-1:0] beta;
  int checks = 0, failures = 0;

  psul #(.H(H)) dut (.z_i(z), .x_i(x), .beta_o(beta));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic [2*H-1:0] e;
      z = H'($urandom);
      x = H'($urandom);
      #1;
      for (int j = 0; j < H; j++) begin
        e[2*j]   = z[j] ^ x[j];
        e[2*j+1] = x[j];
      end
      checks++;
      if (beta !== e) begin
        failures++;
        $display("psul z=%h x=%h gave %h expected %h", z, x, beta, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
