// ssc_node: one node of the fully unrolled, partially pipelined SSC decoder.
//
// The decoder tree is built by instantiating this module recursively. A node
// of NV leaves receives its NV messages alpha from a register of stage T and
// returns its NV bit estimates beta, stable from stage T + LAT. Subtrees that
// are all frozen (rate-0) or all information (rate-1) are pruned as in
// simplified successive-cancellation decoding: a rate-0 child returns zeros,
// a rate-1 child returns the hard decisions (I block) of its messages.
//
// Data flow of a node with halves H = NV/2 (stage = register boundary):
//   left child : f on (alpha[i], alpha[i+H]) -> register (stage T+1).
//                Rate-1 left child: the register holds I(f(.)) directly.
//                Rate-0 left child: no f, beta_l = 0, nothing registered.
//   right child: g on (alpha[i], alpha[i+H], beta_l[i]) once beta_l exists
//                (stage TL); alpha is carried from T to TL by a hold_delay.
//                Rate-0 left child: g0R (same table, beta_l = 0) at stage T.
//                Rate-1 right child: the register holds I(g(.)).
//   combine    : C = {beta_r, beta_l ^ beta_r} into a register, beta_l being
//                carried from TL to TR by a hold_delay. With a rate-0 left
//                child C0R = {beta_r, beta_r} is pure wiring and adds no
//                stage; likewise {0, beta_l} with a rate-0 right child.
// g tables: with IB set, the g block of node NODE uses the per-node
// information-bottleneck table of ib_tables_pkg (valid for the default
// (128,64) code only); otherwise every node uses polar_pkg's uniform rule.
//
// This is the stage assignment of the paper's (8,5) example, where each f,
// g and C operation takes one clock cycle and I and C0R are wires.
//
// The default parameters describe the (8,5) example code (u0..u2 frozen),
// whose tree needs 5 stages. Lint note: when this module itself is the lint
// top, verilator does not expand the recursive child instance and reports
// beta_l as undriven; under any parent (decoder top, testbench) the child is
// elaborated and beta_l is driven.
module ssc_node
  import polar_pkg::*;
  import ib_tables_pkg::*;
#(
  parameter int unsigned      NV     = 8,
  parameter logic [NV-1:0]    FROZEN = 8'b0000_0111,   // the paper's (8,5) example
  parameter int unsigned      T      = 0,
  parameter int unsigned      II     = 10,
  parameter int unsigned      NODE   = 1,      // heap index: root 1, children 2p, 2p+1
  parameter bit               IB     = 1'b0,   // use ib_tables_pkg tables for g
  parameter int unsigned      NP     = T + subtree_latency(NMAX'(FROZEN), NV) + 1
) (
  input  logic          clk,
  input  logic [NP-1:0] pulse,
  input  msg_t [NV-1:0] alpha,
  output logic [NV-1:0] beta
);
  localparam int unsigned H = NV / 2;
  localparam logic [H-1:0] FL = FROZEN[H-1:0];
  localparam logic [H-1:0] FR = FROZEN[NV-1:H];
  localparam node_kind_e   KL = node_kind(NMAX'(FL), H);
  localparam node_kind_e   KR = node_kind(NMAX'(FR), H);
  localparam int unsigned  LATL = subtree_latency(NMAX'(FL), H);
  localparam int unsigned  LATR = subtree_latency(NMAX'(FR), H);
  localparam int unsigned  TL = (KL == RATE0) ? T  : T + 1 + LATL;   // beta_l stable
  localparam int unsigned  TR = (KR == RATE0) ? TL : TL + 1 + LATR;  // beta_r stable

  // g table of this node: the information-bottleneck table of the default
  // code when IB is set, the uniform rule of polar_pkg otherwise
  localparam g_table_t GT = IB ? ib_g_table(NODE) : g_default_table();

  msg_t [H-1:0] a_lo, a_hi;      // alpha[i], alpha[i+H] at stage T
  msg_t [H-1:0] d_lo, d_hi;      // the same, carried to stage TL
  logic [H-1:0] beta_l, beta_r;

  assign a_lo = alpha[H-1:0];
  assign a_hi = alpha[NV-1:H];

  // ---------------------------------------------------------------- left
  if (KL == RATE0) begin : g_left_r0
    assign beta_l = '0;
  end else begin : g_left
    msg_t [H-1:0] f_out;
    for (genvar i = 0; i < H; i++) begin : g_f
      f_re_minsum u_f (.ta(a_lo[i]), .tb(a_hi[i]), .to(f_out[i]));
    end
    if (KL == RATE1) begin : g_r1
      logic [H-1:0] hd, q;
      hard_dec #(.NV(H)) u_i (.t(f_out), .bits(hd));
      always_ff @(posedge clk) q <= hd;
      assign beta_l = q;
    end else begin : g_mixed
      msg_t [H-1:0] q;
      always_ff @(posedge clk) q <= f_out;
      ssc_node #(.NV(H), .FROZEN(FL), .T(T + 1), .II(II), .NODE(2 * NODE),
                .IB(IB), .NP(NP)) u_child (
        .clk, .pulse, .alpha(q), .beta(beta_l));
    end
  end

  // ---------------------------------------------------------------- right
  if (TL > T) begin : g_adly
    hold_delay #(.W(NV * TW), .T_SRC(T), .T_DST(TL), .II(II), .NP(NP)) u_adly (
      .clk, .pulse, .d({a_hi, a_lo}), .q({d_hi, d_lo}));
  end else begin : g_anodly
    assign d_lo = a_lo;
    assign d_hi = a_hi;
  end

  if (KR == RATE0) begin : g_right_r0
    assign beta_r = '0;
  end else begin : g_right
    msg_t [H-1:0] g_out;
    for (genvar i = 0; i < H; i++) begin : g_g
      g_lut #(.LUT(GT)) u_g (.ta(d_lo[i]), .tb(d_hi[i]), .beta(beta_l[i]), .to(g_out[i]));
    end
    if (KR == RATE1) begin : g_r1
      logic [H-1:0] hd, q;
      hard_dec #(.NV(H)) u_i (.t(g_out), .bits(hd));
      always_ff @(posedge clk) q <= hd;
      assign beta_r = q;
    end else begin : g_mixed
      msg_t [H-1:0] q;
      always_ff @(posedge clk) q <= g_out;
      ssc_node #(.NV(H), .FROZEN(FR), .T(TL + 1), .II(II), .NODE(2 * NODE + 1),
                .IB(IB), .NP(NP)) u_child (
        .clk, .pulse, .alpha(q), .beta(beta_r));
    end
  end

  // ---------------------------------------------------------------- combine
  if (KL == RATE0) begin : g_c0r
    assign beta = {beta_r, beta_r};
  end else if (KR == RATE0) begin : g_cr0
    assign beta = {{H{1'b0}}, beta_l};
  end else begin : g_c
    logic [H-1:0] bl_d;
    logic [NV-1:0] c_out, q;
    hold_delay #(.W(H), .T_SRC(TL), .T_DST(TR), .II(II), .NP(NP)) u_bdly (
      .clk, .pulse, .d(beta_l), .q(bl_d));
    combine #(.NV(NV)) u_c (.beta_l(bl_d), .beta_r(beta_r), .beta_v(c_out));
    always_ff @(posedge clk) q <= c_out;
    assign beta = q;
  end

  initial begin
    assert (KL != RATE0 || KR != RATE0) else $error("ssc_node: node must not be rate-0");
    assert (!IB || KR == RATE0 || ib_node(NODE).known)
      else $error("ssc_node: no information-bottleneck table for node %0d", NODE);
  end

endmodule
