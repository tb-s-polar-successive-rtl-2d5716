// tb_hd_shortcut -- tests the four hard-decision shortcuts with random LLRs.
//   Rate-0: all zeros.  Rate-1: the sign bits.
//   SPC (length 8 and 32): the sign bits with the least reliable one (lowest
//     index among equal magnitudes) flipped when their parity is odd; the
//     result must also have even parity.
//   REP (length 8): all bits equal to the sign of the LLR sum (0 on a zero sum).
// Expected values are computed here from integer LLR values.
module tb_hd_shortcut;
  import opsc_pkg::*;
  localparam int Q = 5;
  logic [31:0][Q-1:0] llr;
  logic [7:0]  b_r0, b_r1, b_spc8, b_rep;
  logic [31:0] b_spc32;
  int checks = 0, failures = 0;
  int n_flip = 0, n_rep1 = 0;

  hd_shortcut #(.M(8),  .Q(Q), .KIND(NK_R0))  u_r0  (.llr_i(llr[7:0]), .beta_o(b_r0));
  hd_shortcut #(.M(8),  .Q(Q), .KIND(NK_R1))  u_r1  (.llr_i(llr[7:0]), .beta_o(b_r1));
  hd_shortcut #(.M(8),  .Q(Q), .KIND(NK_SPC)) u_s8  (.llr_i(llr[7:0]), .beta_o(b_spc8));
  hd_shortcut #(.M(32), .Q(Q), .KIND(NK_SPC)) u_s32 (.llr_i(llr),      .beta_o(b_spc32));
  hd_shortcut #(.M(8),  .Q(Q), .KIND(NK_REP)) u_rep (.llr_i(llr[7:0]), .beta_o(b_rep));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] wagner(int m);
    logic [31:0] h;
    int p = 0, r = 0, mn = 99;
    h = '0;
    for (int i = 0; i < m; i++) begin
      h[i] = llr[i][Q-1];
      p ^= h[i];
      if (int'(llr[i][Q-2:0]) < mn) begin mn = int'(llr[i][Q-2:0]); r = i; end
    end
    if (p != 0) h[r] = ~h[r];
    return h;
  endfunction

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int s;
      logic [31:0] e;
      for (int i = 0; i < 32; i++) llr[i] = Q'($urandom);
      #1;
      s = 0;
      for (int i = 0; i < 8; i++) s += llr[i][Q-1] ? -int'(llr[i][Q-2:0]) : int'(llr[i][Q-2:0]);
      checks += 5;
      if (b_r0 !== 8'h00) failures++;
      for (int i = 0; i < 8; i++) if (b_r1[i] !== llr[i][Q-1]) begin failures++; break; end
      e = wagner(8);
      if (b_spc8 !== e[7:0] || ^b_spc8) failures++;
      e = wagner(32);
      if (b_spc32 !== e || ^b_spc32) failures++;
      if (b_rep !== {8{s < 0}}) begin
        failures++;
        $display("REP sum %0d gave %b", s, b_rep);
      end
      if (s < 0) n_rep1++;
      for (int i = 0; i < 8; i++) if (b_spc8[i] != llr[i][Q-1]) begin n_flip++; break; end
    end
    checks++;
    if (n_flip == 0 || n_rep1 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
