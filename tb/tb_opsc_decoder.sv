// tb_opsc_decoder -- end-to-end test of the (1024,854) decoder at its default
// parameters.
//
// The testbench plays the role of the transmitter and channel: random data,
// systematic polar encoding (u-domain transform, re-freeze, transform again),
// BPSK (0 -> +1, 1 -> -1), Gaussian noise (Box-Muller) and a 5-bit
// sign-magnitude LLR quantizer, codeword bits delivered in bit-reversed order.
// Codewords enter back to back with random idle cycles between bursts.
//
// Every output is checked twice:
//   * against a bit-exact software model of the decoder written here as an
//     iterative (stack-based) traversal of the decoding tree: F/G with
//     saturating requantization, Rate-0/Rate-1/SPC/REP shortcuts and partial
//     sums, using its own copies of the shortcut rules and the quantization
//     tree;
//   * against the transmitted data on noiseless codewords.
// It also checks the systematic property of the encoder, the latency (derived
// from the tree by the model), and that each mechanism occurred: every
// shortcut class, the SPC parity correction, a negative REP decision,
// quantizer saturation, a registered node whose Rate-0 left child removes its
// F stage, back-to-back input, idle cycles, and channel errors
// that the decoder corrected.
module tb_opsc_decoder;
  import opsc_pkg::*;

  localparam int N      = 1024;
  localparam int K      = 854;
  localparam int Q      = 5;
  localparam int N_LIM  = 32;
  localparam int COMB_M = 32;
  localparam int LOGN   = 10;
  localparam int FRAMES = 240;

  logic                clk = 1'b0;
  logic                rst_n = 1'b0;
  logic                in_valid = 1'b0;
  logic [N-1:0][Q-1:0] llr = '0;
  logic                out_valid;
  logic [K-1:0]        data_out;

  opsc_decoder dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .llr_i(llr),
    .out_valid(out_valid), .data_o(data_out));

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- code definition ----------------
  logic [N-1:0] frozen;
  initial frozen = N'(pw_frozen(N, K));

  // ---------------- reference model ----------------
  typedef enum int {K_NONE, K_R0, K_R1, K_SPC, K_REP} rkind_e;

  int cnt_r0 = 0, cnt_r1 = 0, cnt_spc = 0, cnt_rep = 0;
  int cnt_spc_flip = 0, cnt_rep_one = 0, cnt_sat = 0, cnt_r0_left = 0;
  int ref_latency;

  function automatic rkind_e ref_kind(int pos, int m);
    int ones = 0;
    for (int i = 0; i < m; i++) ones += frozen[pos+i];
    if (ones == m) return K_R0;
    if (ones == 0) return K_R1;
    if (m <= N_LIM && ones == 1 && frozen[pos]) return K_SPC;
    if (m <= N_LIM && ones == m - 1 && !frozen[pos+m-1]) return K_REP;
    return K_NONE;
  endfunction

  // widths of the published AQ tree (edges of the 1024..128 nodes)
  function automatic int ref_q(int m, int pos, int qin, int side);
    int q = qin;
    if (m == 1024) q = side ? 4 : 5;
    else if (m == 512) q = (pos == 0) ? (side ? 4 : 5) : (side ? 3 : 4);
    else if (m == 256) begin
      if (pos == 0) q = side ? 4 : 5;
      else if (pos == 768) q = side ? 1 : 3;
      else q = side ? 3 : 4;
    end
    return (q < qin) ? q : qin;
  endfunction

  bit sg [LOGN+1][N];
  int mg [LOGN+1][N];
  int qw [LOGN+1];
  bit zsv[LOGN+1][N];

  function automatic int sat(int m, int q);
    int mx = (1 << (q - 1)) - 1;
    if (m > mx) begin
      cnt_sat++;
      return mx;
    end
    return m;
  endfunction

  task automatic ref_decode(input bit s_in[N], input int m_in[N], output bit beta[N]);
    int  pos[LOGN+1], phase[LOGN+1];
    int  d, m, h, lat;
    bit  have_ret;
    bit  ret[N], tmp[N];
    rkind_e k;
    d = 0; pos[0] = 0; phase[0] = 0; qw[0] = Q; have_ret = 0; lat = 0;
    for (int i = 0; i < N; i++) begin sg[0][i] = s_in[i]; mg[0][i] = m_in[i]; end
    forever begin
      m = N >> d;
      h = m / 2;
      if (have_ret) begin
        if (phase[d] == 1) begin
          // left child done: G stage into level d+1
          qw[d+1] = ref_q(m, pos[d], qw[d], 1);
          for (int j = 0; j < h; j++) begin
            int v1, v2, v;
            zsv[d][j] = ret[j];
            v1 = sg[d][2*j]   ? -mg[d][2*j]   : mg[d][2*j];
            v2 = sg[d][2*j+1] ? -mg[d][2*j+1] : mg[d][2*j+1];
            v  = ret[j] ? v2 - v1 : v1 + v2;
            sg[d+1][j] = (v < 0);
            mg[d+1][j] = sat((v < 0) ? -v : v, qw[d+1]);
          end
          phase[d] = 2;
          d++;
          pos[d] = pos[d-1] + h;
          phase[d] = 0;
          have_ret = 0;
          continue;
        end else begin
          for (int j = 0; j < h; j++) begin
            tmp[2*j]   = zsv[d][j] ^ ret[j];
            tmp[2*j+1] = ret[j];
          end
          for (int j = 0; j < m; j++) ret[j] = tmp[j];
          if (d == 0) break;
          d--;
          continue;
        end
      end
      // a node is entered
      k = ref_kind(pos[d], m);
      // latency: one stage per shortcut or merged sub-tree in the registered
      // part of the tree, except a Rate-0 left child (no stage at all); two
      // per split node (F and G registers), one if its left child is Rate-0
      if (d == 0 || 2 * m > COMB_M) begin
        if (k != K_NONE || m <= COMB_M)
          if (k == K_R0 && d > 0 && ((pos[d] / m) % 2) == 0) cnt_r0_left++;
          else lat += 1;
        else
          lat += (ref_kind(pos[d], m / 2) == K_R0) ? 1 : 2;
      end
      if (k != K_NONE) begin
        case (k)
          K_R0: begin cnt_r0++; for (int i = 0; i < m; i++) ret[i] = 0; end
          K_R1: begin cnt_r1++; for (int i = 0; i < m; i++) ret[i] = sg[d][i]; end
          K_SPC: begin
            int mn, r; bit p;
            cnt_spc++;
            mn = mg[d][0]; r = 0; p = 0;
            for (int i = 0; i < m; i++) begin
              ret[i] = sg[d][i];
              p ^= sg[d][i];
              if (mg[d][i] < mn) begin mn = mg[d][i]; r = i; end
            end
            if (p) cnt_spc_flip++;
            ret[r] ^= p;
          end
          default: begin
            int s = 0;
            cnt_rep++;
            for (int i = 0; i < m; i++) s += sg[d][i] ? -mg[d][i] : mg[d][i];
            if (s < 0) cnt_rep_one++;
            for (int i = 0; i < m; i++) ret[i] = (s < 0);
          end
        endcase
        have_ret = 1;
        if (d == 0) break;
        d--;
        continue;
      end
      // F stage into level d+1
      qw[d+1] = ref_q(m, pos[d], qw[d], 0);
      for (int j = 0; j < h; j++) begin
        int a = mg[d][2*j], b = mg[d][2*j+1];
        sg[d+1][j] = sg[d][2*j] ^ sg[d][2*j+1];
        mg[d+1][j] = sat((a < b) ? a : b, qw[d+1]);
      end
      phase[d] = 1;
      d++;
      pos[d] = pos[d-1];
      phase[d] = 0;
    end
    ref_latency = lat + 1;
    beta = ret;
  endtask

  // ---------------- transmitter and channel ----------------
  function automatic void polar_transform(inout bit v[N]);
    for (int s = 1; s < N; s *= 2)
      for (int i = 0; i < N; i++)
        if ((i & s) == 0) v[i] ^= v[i+s];
  endfunction

  function automatic int brev(int i);
    int r = 0;
    for (int b = 0; b < LOGN; b++) if ((i >> b) & 1) r |= 1 << (LOGN - 1 - b);
    return r;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  typedef struct {
    logic [K-1:0] data;      // transmitted data
    logic [K-1:0] expect_d;  // model output
    bit           noiseless;
    int           t_in;
    int           hard_errs; // channel hard-decision errors on data bits
  } frame_t;

  frame_t q_exp[$];
  int cnt_b2b = 0, cnt_idle = 0, cnt_corrected = 0, cnt_noisy_ok = 0;
  int lat_fail = 0;

  task automatic make_frame(input real ebno_db, output logic [N-1:0][Q-1:0] llr_v,
                            output frame_t f);
    bit  u[N], x[N], s_in[N], beta[N];
    int  m_in[N];
    int  k;
    real sigma, y, rate;
    rate  = real'(K) / real'(N);
    sigma = (ebno_db > 90.0) ? 0.0 : $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebno_db / 10.0))));
    f.noiseless = (sigma == 0.0);
    for (int i = 0; i < K; i++) f.data[i] = $urandom_range(1, 0);
    // systematic encoding
    k = 0;
    for (int i = 0; i < N; i++) begin
      u[i] = frozen[i] ? 1'b0 : f.data[k];
      if (!frozen[i]) k++;
    end
    polar_transform(u);
    for (int i = 0; i < N; i++) if (frozen[i]) u[i] = 0;
    x = u;
    polar_transform(x);
    k = 0;
    for (int i = 0; i < N; i++)
      if (!frozen[i]) begin
        checks++;
        if (x[i] != f.data[k]) failures++;
        k++;
      end
    // channel, bit-reversed order, 5-bit sign-magnitude LLR (scale 4 per unit)
    f.hard_errs = 0;
    for (int i = 0; i < N; i++) begin
      int mag;
      y = (x[brev(i)] ? -1.0 : 1.0) + sigma * gauss();
      mag = int'((y < 0 ? -y : y) * 4.0 + 0.5);
      if (mag > 15) mag = 15;
      s_in[i] = (y < 0);
      m_in[i] = mag;
      llr_v[i] = {s_in[i], 4'(mag)};
      if (!frozen[brev(i)] && s_in[i] != x[brev(i)]) f.hard_errs++;
    end
    ref_decode(s_in, m_in, beta);
    k = 0;
    for (int i = 0; i < N; i++)
      if (!frozen[i]) begin
        f.expect_d[k] = beta[brev(i)];
        k++;
      end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    logic [N-1:0][Q-1:0] llr_v;
    frame_t f;
    bit prev_valid;
    real ebno;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    prev_valid = 0;
    for (int n = 0; n < FRAMES; n++) begin
      case (n % 4)
        0: ebno = 99.0;   // noiseless
        1: ebno = 5.0;
        2: ebno = 4.0;
        default: ebno = 3.0;
      endcase
      make_frame(ebno, llr_v, f);
      f.t_in = cycle + 1;   // the DUT samples this input at the next edge
      q_exp.push_back(f);
      llr <= llr_v;
      in_valid <= 1'b1;
      if (prev_valid) cnt_b2b++;
      prev_valid = 1;
      @(posedge clk);
      if ($urandom_range(7, 0) == 0) begin
        in_valid <= 1'b0;
        llr <= '0;
        prev_valid = 0;
        cnt_idle++;
        repeat ($urandom_range(3, 1)) @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    wait (q_exp.size() == 0);
    repeat (5) @(posedge clk);
    $display("latency %0d cycles (model %0d)", lat_seen, ref_latency);
    $display("frames: back-to-back %0d, idle gaps %0d, noisy decoded as model %0d, corrected %0d",
             cnt_b2b, cnt_idle, cnt_noisy_ok, cnt_corrected);
    $display("shortcut visits: R0 %0d R1 %0d SPC %0d REP %0d; SPC flips %0d, REP ones %0d, AQ saturations %0d, Rate-0 left children without F stage %0d",
             cnt_r0, cnt_r1, cnt_spc, cnt_rep, cnt_spc_flip, cnt_rep_one, cnt_sat, cnt_r0_left);
    begin
      int ev[11];
      ev = '{cnt_r0, cnt_r1, cnt_spc, cnt_rep, cnt_spc_flip, cnt_rep_one, cnt_sat,
             cnt_b2b, cnt_idle, cnt_corrected, cnt_r0_left};
      foreach (ev[i]) begin
        checks++;
        if (ev[i] == 0) begin
          failures++;
          $display("mechanism %0d never occurred", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- output checking ----------------
  int lat_seen = -1;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      frame_t f;
      if (q_exp.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cycle);
      end else begin
        f = q_exp.pop_front();
        lat_seen = cycle - f.t_in;
        checks += 2;
        if (lat_seen != ref_latency) begin
          failures++;
          if (lat_fail++ < 3) $display("latency %0d, expected %0d", lat_seen, ref_latency);
        end
        if (data_out !== f.expect_d) begin
          failures++;
          $display("frame at t=%0d: output differs from model", f.t_in);
        end
        if (f.noiseless) begin
          checks++;
          if (data_out !== f.data) begin
            failures++;
            $display("noiseless frame at t=%0d not decoded", f.t_in);
          end
        end else if (data_out === f.expect_d) begin
          cnt_noisy_ok++;
          if (f.hard_errs > 0 && data_out === f.data) cnt_corrected++;
        end
      end
    end
  end
endmodule
