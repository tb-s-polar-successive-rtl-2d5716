// opsc_pkg -- shared types and elaboration-time functions of the OPSC decoder.
//
// Everything here is evaluated while the design is elaborated; none of it
// becomes logic. It holds:
//   * the LLR number format: sign-magnitude, bit Q-1 is the sign (1 = negative),
//     bits Q-2:0 the magnitude. A 1-bit LLR carries the sign only.
//   * pw_frozen(): the frozen-bit mask of an (N,K) polar code. The frozen set
//     of the published (1024,854) code (density evolution at 6.5 dB Es/No) is
//     not listed, so this design's default builds the set with the
//     polarization-weight rule: index i has weight sum_j b_j(i) * 2^(j/4),
//     the K heaviest indices carry data. Bit i of the mask is 1 when leaf i
//     (the i-th bit in decoding order) is frozen.
//   * node_kind(): which hard-decision shortcut (Rate-0, Rate-1, single parity
//     check, repetition) a constituent code of length M is, if any.
//   * node_lat(): pipeline latency in clock cycles of a registered sub-decoder,
//     mirroring the register placement of opsc_node.
//   * aq_width(): LLR width after the adaptive quantizer for the children of
//     the 128..1024 nodes of the (1024,854) code (the published AQ tree);
//     other nodes keep their parent's width.
//   * bitrev(): bit reversal, used to locate systematic bits in the codeword.
package opsc_pkg;

  // Widest code the mask functions handle.
  localparam int unsigned NMAX = 4096;

  typedef logic [NMAX-1:0] mask_t;

  // Constituent-code classes. NK_NONE means "split further with F and G".
  typedef enum logic [2:0] {
    NK_NONE = 3'd0,
    NK_R0   = 3'd1,
    NK_R1   = 3'd2,
    NK_SPC  = 3'd3,
    NK_REP  = 3'd4
  } node_kind_e;

  // 2^(j/4) in units of 1/1000, j = 0..11.
  function automatic int unsigned pw_beta(int unsigned j);
    case (j)
      0:  return 1000;
      1:  return 1189;
      2:  return 1414;
      3:  return 1682;
      4:  return 2000;
      5:  return 2378;
      6:  return 2828;
      7:  return 3364;
      8:  return 4000;
      9:  return 4757;
      10: return 5657;
      default: return 6727;
    endcase
  endfunction

  function automatic int unsigned pw_weight(int unsigned i);
    int unsigned w;
    w = 0;
    for (int unsigned j = 0; j < 12; j++)
      if (((i >> j) & 1) != 0) w += pw_beta(j);
    return w;
  endfunction

  // Frozen mask of an (n,k) code: the k indices of largest weight are data
  // (0), the rest frozen (1). Ties at the threshold go to the higher index.
  function automatic mask_t pw_frozen(int unsigned n, int unsigned k);
    mask_t       f;
    int unsigned lo, hi, mid, c, cgt, need;
    lo = 0;
    hi = 200000;
    // largest threshold t with |{i : w(i) >= t}| >= k
    while (lo < hi) begin
      mid = (lo + hi + 1) / 2;
      c = 0;
      for (int unsigned i = 0; i < n; i++)
        if (pw_weight(i) >= mid) c++;
      if (c >= k) lo = mid;
      else hi = mid - 1;
    end
    f = '0;
    cgt = 0;
    for (int unsigned i = 0; i < n; i++) begin
      if (pw_weight(i) > lo) cgt++;
      else f[i] = 1'b1;
    end
    need = (k > cgt) ? k - cgt : 0;
    for (int i = int'(n) - 1; i >= 0; i--)
      if (need > 0 && pw_weight(i) == lo) begin
        f[i] = 1'b0;
        need--;
      end
    return f;
  endfunction

  // Shortcut class of the length-m constituent code whose frozen mask is v[m-1:0].
  function automatic node_kind_e node_kind(mask_t v, int unsigned m, int unsigned nlim);
    int unsigned ones;
    ones = 0;
    for (int unsigned i = 0; i < m; i++)
      if (v[i]) ones++;
    if (ones == m) return NK_R0;
    if (ones == 0) return NK_R1;
    if (m <= nlim && ones == 1 && v[0]) return NK_SPC;
    if (m <= nlim && ones == m - 1 && !v[m-1]) return NK_REP;
    return NK_NONE;
  endfunction

  // Latency of a registered sub-decoder of length m with frozen mask v:
  // a shortcut node or a node of length <= comb_m is one registered stage;
  // a node whose left child is Rate-0 adds its G register to the latency of
  // its right child; any other node adds its F register and its G register to
  // the latencies of its two children.
  function automatic int unsigned node_lat(mask_t v, int unsigned m, int unsigned comb_m,
                                           int unsigned nlim);
    mask_t       reached, next_reached, sub, sel;
    int unsigned lat;
    lat = 0;
    reached = '0;
    reached[0] = 1'b1;
    for (int unsigned s = m; s >= 1; s = s / 2) begin
      next_reached = '0;
      sel = (mask_t'(1) << s) - mask_t'(1);
      for (int unsigned b = 0; b < m / s; b++)
        if (reached[b]) begin
          sub = (v >> (b * s)) & sel;
          if (node_kind(sub, s, nlim) != NK_NONE || s <= comb_m) lat += 1;
          else if (node_kind(sub, s / 2, nlim) == NK_R0) begin
            // Rate-0 left child: no F stage, only the G register
            lat += 1;
            next_reached[2*b+1] = 1'b1;
          end else begin
            lat += 2;
            next_reached[2*b]   = 1'b1;
            next_reached[2*b+1] = 1'b1;
          end
        end
      reached = next_reached;
      if (s == 1) break;
    end
    return lat;
  endfunction

  // Width of the LLRs handed to the left (side 0) or right (side 1) child of
  // the length-m node that starts at leaf pos, for a node fed q_in-bit LLRs.
  function automatic int unsigned aq_width(int unsigned ntop, int unsigned m, int unsigned pos,
                                           int unsigned q_in, bit side, bit aq_en);
    int unsigned q;
    q = q_in;
    if (aq_en && ntop == 1024) begin
      case (m)
        1024: q = side ? 4 : 5;
        512:  q = (pos == 0) ? (side ? 4 : 5) : (side ? 3 : 4);
        256: begin
          case (pos)
            0:       q = side ? 4 : 5;
            256:     q = side ? 3 : 4;
            512:     q = side ? 3 : 4;
            default: q = side ? 1 : 3;
          endcase
        end
        default: q = q_in;
      endcase
    end
    return (q < q_in) ? q : q_in;
  endfunction

  function automatic int unsigned bitrev(int unsigned i, int unsigned nbits);
    int unsigned r;
    r = 0;
    for (int unsigned b = 0; b < nbits; b++)
      if (((i >> b) & 1) != 0) r |= 1 << (nbits - 1 - b);
    return r;
  endfunction

endpackage
