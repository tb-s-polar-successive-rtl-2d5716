// tb_delay_buffer -- streams random words through buffers of depth 5, 1 and 0
// and checks that every word reappears exactly DEPTH cycles later.
module tb_delay_buffer;
  localparam int W = 24;
  logic         clk = 1'b0;
  logic [W-1:0] d, q5, q1, q0;
  logic [W-1:0] hist [$];
  int checks = 0, failures = 0;

  delay_buffer #(.WIDTH(W), .DEPTH(5)) dut5 (.clk(clk), .d_i(d), .q_o(q5));
  delay_buffer #(.WIDTH(W), .DEPTH(1)) dut1 (.clk(clk), .d_i(d), .q_o(q1));
  delay_buffer #(.WIDTH(W), .DEPTH(0)) dut0 (.clk(clk), .d_i(d), .q_o(q0));

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      // hist[0] is the word clocked in at the last rising edge
      if (t >= 1) begin
        checks++;
        if (q1 !== hist[0]) failures++;
      end
      if (t >= 5) begin
        checks++;
        if (q5 !== hist[4]) begin
          failures++;
          $display("t=%0d depth 5 gave %h expected %h", t, q5, hist[4]);
        end
      end
      d = W'($urandom);
      hist.push_front(d);
      #0.25;
      checks++;
      if (q0 !== d) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
