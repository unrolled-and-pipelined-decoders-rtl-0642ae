// tb_ref_pkg: reference models used by the testbenches.
//
// Written from the decoding equations, independently of the RTL structure:
//  * labels are converted to the original alphabet T = {0..15}, whose LLR
//    is t - 7.5, and the f and g rules are evaluated on those values;
//  * g_ref_ib() evaluates the information-bottleneck g rule of one tree node
//    in real arithmetic from the node's label LLRs and output boundaries;
//  * ssc_decode() is a sequential simplified successive-cancellation decoder
//    that walks the decoder tree depth first with an explicit stack;
//  * sys_encode() is systematic polar encoding (transform, re-freeze,
//    transform again);
//  * awgn_label() is a BPSK/AWGN channel followed by a uniform 16-level
//    quantizer (used with the uniform g rule); awgn_label_ib() uses instead the
//    information-bottleneck channel quantizer for which the per-node g
//    tables of ib_tables_pkg were designed (Eb/N0 = 3 dB, sigma^2 = 0.501).
package tb_ref_pkg;
  import ib_tables_pkg::*;

  localparam int MAXN = 128;
  localparam int MAXL = 8;     // log2(MAXN) + 1 levels

  typedef logic [3:0] lbl_t;
  typedef lbl_t         msgs_t [MAXN];
  typedef logic [MAXN-1:0] bits_t;

  // relabeled label -> LLR of the original alphabet (t_orig - 7.5)
  function automatic real llr_of(lbl_t t);
    int orig;
    orig = t[3] ? 8 + int'(t[2:0]) : 7 - int'(t[2:0]);
    return real'(orig) - 7.5;
  endfunction

  // original-alphabet label -> relabeled label
  function automatic lbl_t relabel(int orig);
    lbl_t r;
    if (orig >= 8) r = lbl_t'(orig);
    else           r = lbl_t'(7 - orig);
    return r;
  endfunction

  // eq. (5): t_o = f(t_a - D, t_b - D) + D, D = 7.5, f the min-sum rule
  function automatic lbl_t f_ref(lbl_t ta, lbl_t tb);
    real a, b, m, o;
    a = llr_of(ta);
    b = llr_of(tb);
    m = (a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
    o = ((a < 0) != (b < 0)) ? -m : m;
    return relabel(int'(o + 7.5));   // o + 7.5 is a whole number
  endfunction

  // uniform g rule: LLR sum, magnitude index = min(|sum|, 7), sign of the sum (0 counts positive)
  function automatic lbl_t g_ref(lbl_t ta, lbl_t tb, logic beta);
    real s, mag;
    int mi;
    s   = beta ? llr_of(tb) - llr_of(ta) : llr_of(tb) + llr_of(ta);
    mag = s < 0 ? -s : s;
    mi  = int'(mag);
    if (mi > 7) mi = 7;
    return (s >= 0) ? relabel(8 + mi) : relabel(7 - mi);
  endfunction

  // g of decoder-tree node p with its information-bottleneck table: the
  // labels' LLRs and the output boundaries are taken from ib_node(p) and the
  // sum is formed in real arithmetic
  function automatic lbl_t g_ref_ib(int p, lbl_t ta, lbl_t tb, logic beta);
    ib_node_t n;
    real la, lb, s, sc;
    int mi;
    n  = ib_node(p);
    sc = real'(1 << IB_SCALE_LOG2);
    la = real'(n.lev[ta[2:0]]) / sc;
    lb = real'(n.lev[tb[2:0]]) / sc;
    if (!ta[3]) la = -la;
    if (!tb[3]) lb = -lb;
    s  = beta ? lb - la : lb + la;
    mi = 0;
    for (int k = 0; k < 7; k++)
      if (real'(n.th[k]) / sc <= (s < 0 ? -s : s)) mi++;
    return {s >= 0.0, 3'(mi)};
  endfunction

  function automatic logic hd_ref(lbl_t t);
    return llr_of(t) < 0 ? 1'b1 : 1'b0;
  endfunction

  // x = u F^{(x)n}, natural order
  function automatic bits_t polar_transform(bits_t u, int n_len);
    bits_t x;
    x = u;
    for (int h = 1; h < n_len; h *= 2)
      for (int i = 0; i < n_len; i++)
        if ((i & h) == 0) x[i] = x[i] ^ x[i + h];
    return x;
  endfunction

  // systematic encoding: data bits at the unfrozen positions of x
  function automatic bits_t sys_encode(bits_t data_at_pos, bits_t frozen, int n_len);
    bits_t v;
    v = polar_transform(data_at_pos & ~frozen, n_len);
    v = v & ~frozen;
    return polar_transform(v, n_len);
  endfunction

  // Sequential SSC decoder. Node (size sz, first leaf off) keeps its messages
  // in A[log2 sz][off +: sz] and its estimates in B[log2 sz][off +: sz].
  function automatic bits_t ssc_decode(msgs_t y, bits_t frozen, int n_len, bit ib = 1'b0);
    lbl_t A [MAXL][MAXN];
    logic B [MAXL][MAXN];
    int st_sz [64], st_off [64], st_ph [64];
    int sp, lg, sz, off, h, nf;
    bits_t res;
    lg = $clog2(n_len);
    for (int i = 0; i < n_len; i++) A[lg][i] = y[i];
    sp = 0; st_sz[0] = n_len; st_off[0] = 0; st_ph[0] = 0;
    while (sp >= 0) begin
      sz = st_sz[sp]; off = st_off[sp]; lg = $clog2(sz); h = sz / 2;
      nf = 0;
      for (int i = 0; i < sz; i++) nf += frozen[off + i] ? 1 : 0;
      if (nf == sz) begin                       // rate-0
        for (int i = 0; i < sz; i++) B[lg][off + i] = 1'b0;
        sp--;
      end else if (nf == 0) begin               // rate-1
        for (int i = 0; i < sz; i++) B[lg][off + i] = hd_ref(A[lg][off + i]);
        sp--;
      end else if (st_ph[sp] == 0) begin
        for (int i = 0; i < h; i++)
          A[lg-1][off + i] = f_ref(A[lg][off + i], A[lg][off + h + i]);
        st_ph[sp] = 1;
        sp++; st_sz[sp] = h; st_off[sp] = off; st_ph[sp] = 0;
      end else if (st_ph[sp] == 1) begin
        for (int i = 0; i < h; i++)
          A[lg-1][off + h + i] = ib ? g_ref_ib(n_len / sz + off / sz, A[lg][off + i],
                                               A[lg][off + h + i], B[lg-1][off + i])
                                    : g_ref(A[lg][off + i], A[lg][off + h + i], B[lg-1][off + i]);
        st_ph[sp] = 2;
        sp++; st_sz[sp] = h; st_off[sp] = off + h; st_ph[sp] = 0;
      end else begin
        for (int i = 0; i < h; i++) begin
          B[lg][off + i]     = B[lg-1][off + i] ^ B[lg-1][off + h + i];
          B[lg][off + h + i] = B[lg-1][off + h + i];
        end
        sp--;
      end
    end
    res = '0;
    for (int i = 0; i < n_len; i++) res[i] = B[$clog2(n_len)][i];
    return res;
  endfunction

  // standard normal sample (Box-Muller on $urandom)
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK (0 -> +1) over AWGN, LLR = 2y/sigma^2, uniform quantizer of step 1:
  // magnitude index floor(|LLR|) saturated at 7
  function automatic lbl_t awgn_label(logic bit_x, real sigma);
    real yv, l, ml;
    int mi;
    yv = (bit_x ? -1.0 : 1.0) + sigma * gauss();
    l  = 2.0 * yv / (sigma * sigma);
    ml = l < 0 ? -l : l;
    mi = (ml >= 7.0) ? 7 : $rtoi(ml);
    return {(l >= 0) ? 1'b1 : 1'b0, 3'(mi)};
  endfunction

  // BPSK over AWGN followed by the information-bottleneck channel quantizer:
  // magnitude index = number of boundaries CH_Y_TH below |y|, sign of y
  localparam real CH_Y_TH [7] = '{0.1275, 0.2625, 0.4075, 0.5675, 0.7575, 1.0025, 1.3675};

  function automatic lbl_t awgn_label_ib(logic bit_x, real sigma);
    real yv, ay;
    int mi;
    yv = (bit_x ? -1.0 : 1.0) + sigma * gauss();
    ay = yv < 0 ? -yv : yv;
    mi = 0;
    for (int k = 0; k < 7; k++) if (ay >= CH_Y_TH[k]) mi++;
    return {(yv >= 0) ? 1'b1 : 1'b0, 3'(mi)};
  endfunction

endpackage
