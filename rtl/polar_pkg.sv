// polar_pkg: types, code construction and look-up-table rules shared by the
// unrolled LUT-based SSC polar decoder.
//
// Messages. Every soft value inside the decoder is a TW-bit integer label
// t of the relabeled alphabet T_re = {7,6,5,4,3,2,1,0,8,9,...,15} (|T| = 16).
// Written as {s, m}: s = 1 means the associated LLR is positive (bit 0 more
// likely), m is a magnitude index, 0 being the least reliable. The label of
// the original alphabet T = {0..15} whose LLR grows with t is recovered as
// t = s ? 8+m : 7-m. With that relabeling the min-sum rule applies to the
// labels directly (f block), and a hard decision is the inverted MSB.
//
// Code. The default code is the systematic (128,64) polar code designed for
// Eb/N0 = 3.0 dB. The paper constructs it with the Tal-Vardy method but
// does not list the frozen set; FROZEN_128_64 below was obtained with the
// Gaussian approximation of density evolution at sigma^2 = 1/(2*R*Eb/N0),
// keeping the 64 bit-channels u_i (x = u * F^{(x)7}, natural index order) of
// largest mean LLR. Bit i of the mask is 1 when u_i is frozen. With this set
// and the stage rules of ssc_node the decoder latency is 85 register stages
// after the input register, i.e. 86 clock cycles, the latency the paper
// reports for its decoder.
//
// g look-up tables. The paper designs one g table per decoder-tree edge
// with the information-bottleneck method and does not print their
// contents. ib_tables_pkg holds this design's own IB tables for the default
// code. g_rule() is the uniform default for other codes: each label stands for the
// LLR value +/-(m + 1/2); the table entry is the label whose magnitude index
// is min(|k|, 7), k = L(tb) + L(ta) (beta = 0) or L(tb) - L(ta) (beta = 1),
// with a positive sign for k >= 0. g_lut takes its table as a parameter,
// so per-node tables replace the rule without touching the datapath.
package polar_pkg;

  localparam int unsigned TW = 4;                 // message width, |T| = 2**TW
  localparam int unsigned MW = TW - 1;            // magnitude bits
  localparam int unsigned MMAX = (1 << MW) - 1;   // largest magnitude index

  typedef logic [TW-1:0] msg_t;

  // (128,64) code: N, K, initiation interval and latency reported in the paper
  localparam int unsigned N_DEF  = 128;
  localparam int unsigned NMAX   = 1024;            // largest code length the helpers accept
  localparam int unsigned K_DEF  = 64;
  localparam int unsigned II_DEF = 10;
  localparam logic [127:0] FROZEN_128_64 = 128'h000000030017177f011717ff3fffffff;

  typedef enum logic [1:0] {RATE0 = 2'd0, RATE1 = 2'd1, MIXED = 2'd2} node_kind_e;

  // Kind of the subtree whose frozen mask is the low nv bits of mask.
  function automatic node_kind_e node_kind(logic [NMAX-1:0] mask, int unsigned nv);
    logic all_f, all_i;
    all_f = 1'b1;
    all_i = 1'b1;
    for (int unsigned i = 0; i < nv; i++) begin
      if (mask[i]) all_i = 1'b0;
      else         all_f = 1'b0;
    end
    if (all_f) return RATE0;
    if (all_i) return RATE1;
    return MIXED;
  endfunction

  // Number of register stages a subtree of nv leaves adds after the register
  // holding its input messages (0 for rate-0 and rate-1 subtrees):
  //   left  part: 0 if rate-0, else 1 (f register) + its own latency
  //   right part: 0 if rate-0, else 1 (g register) + its own latency
  //   combine   : 1 (C register) unless one child is rate-0 (wires only)
  // Evaluated bottom-up over all subtrees without recursion.
  function automatic int unsigned subtree_latency(logic [NMAX-1:0] mask, int unsigned nv);
    int unsigned lat [2*NMAX];   // lat[sz + idx], node idx of size sz
    node_kind_e  knd [2*NMAX];
    for (int unsigned i = 0; i < nv; i++) begin
      knd[nv + i] = mask[i] ? RATE0 : RATE1;     // size-1 nodes, slot nv..2nv-1
      lat[nv + i] = 0;
    end
    // a node at slot p has children at slots 2p (left) and 2p+1 (right)
    for (int unsigned p = nv - 1; p >= 1; p--) begin
      node_kind_e kl, kr;
      int unsigned ll, lr;
      kl = knd[2*p];
      kr = knd[2*p+1];
      if (kl == RATE0 && kr == RATE0)      begin knd[p] = RATE0; lat[p] = 0; end
      else if (kl == RATE1 && kr == RATE1) begin knd[p] = RATE1; lat[p] = 0; end
      else begin
        knd[p] = MIXED;
        ll = (kl == RATE0) ? 0 : 1 + lat[2*p];
        lr = (kr == RATE0) ? 0 : 1 + lat[2*p+1];
        lat[p] = ll + lr + ((kl == RATE0 || kr == RATE0) ? 0 : 1);
      end
    end
    return (nv == 1) ? 0 : lat[1];
  endfunction

  // Index of the j-th unfrozen position (information bit j of a systematic
  // code sits at this codeword position).
  function automatic int unsigned info_position(logic [NMAX-1:0] mask, int unsigned nv,
                                                int unsigned j);
    int unsigned cnt;
    cnt = 0;
    for (int unsigned i = 0; i < nv; i++)
      if (!mask[i]) begin
        if (cnt == j) return i;
        cnt++;
      end
    return 0;
  endfunction

  // Signed LLR value of a label, in units of 1/2: +/-(2m + 1).
  function automatic int label_value2(msg_t t);
    int v;
    v = 2 * int'(t[MW-1:0]) + 1;
    return t[TW-1] ? v : -v;
  endfunction

  // g / g0R table entry (uniform rule, see header).
  function automatic msg_t g_rule(msg_t ta, msg_t tb, logic beta);
    int k2, mag;
    msg_t r;
    k2  = beta ? label_value2(tb) - label_value2(ta) : label_value2(tb) + label_value2(ta);
    mag = (k2 < 0 ? -k2 : k2) / 2;
    if (mag > int'(MMAX)) mag = int'(MMAX);
    r[TW-1]   = (k2 >= 0) ? 1'b1 : 1'b0;
    r[MW-1:0] = MW'(mag);
    return r;
  endfunction

  // Whole g table, addressed by {beta, tb, ta}.
  localparam int unsigned GADDR = 2 * TW + 1;
  typedef msg_t g_table_t [1 << GADDR];

  function automatic g_table_t g_default_table();
    g_table_t tab;
    for (int unsigned a = 0; a < (1 << GADDR); a++) begin
      logic [GADDR-1:0] ad;
      ad = GADDR'(a);
      tab[a] = g_rule(ad[TW-1:0], ad[2*TW-1:TW], ad[GADDR-1]);
    end
    return tab;
  endfunction

endpackage
