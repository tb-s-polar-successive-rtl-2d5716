// delay_buffer -- register-based buffer memory of the unrolled decoder.
//
// A fixed-length delay line: the word written in a cycle leaves DEPTH cycles
// later. Because the decoder accepts a new codeword every clock cycle, a
// buffer must hold one word per cycle of the latency it bridges; it is built
// from flip-flops (a shift register) so that every word moves each cycle and
// no addressing is needed. DEPTH = 0 is a plain connection and DEPTH = 1 is a
// pipeline register; the decoder uses this module for both, and for the LLR
// and the partial-sum buffers. The defaults are the published LLR buffer of
// the length-1024 node: 1024 five-bit LLRs, 41 deep. No reset: the contents
// are data, their validity travels in a separate valid pipeline.
module delay_buffer #(
  parameter int unsigned WIDTH = 5120,
  parameter int unsigned DEPTH = 41
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] q_o
);
  if (DEPTH == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_line
    logic [WIDTH-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      mem[0] <= d_i;
      for (int unsigned i = 1; i < DEPTH; i++) mem[i] <= mem[i-1];
    end

    assign q_o = mem[DEPTH-1];
  end
endmodule
