// polar_unrolled_dec: fully unrolled, partially pipelined re-MS-IB SSC
// decoder for a systematic polar code, by default the (128,64) code.
//
// The decoder takes N quantized channel messages (4-bit labels of the
// relabeled alphabet, see polar_pkg) and returns the N-bit codeword estimate
// and the K information bits, which a systematic code carries at the
// unfrozen codeword positions. Every f, g and C operation of the pruned
// decoder tree has its own hardware (ssc_node, instantiated recursively), so
// frames flow through without a controller; one frame can enter every II
// cycles (II = 10 by default, as in the paper) and several frames are in
// flight at once.
//
// Interface: in_valid/in_ready handshake on the input; in_llr is captured
// into the input register when the frame is accepted. out_valid pulses one
// cycle when out_cw/out_info first hold a decoded frame; they stay stable for
// at least II cycles. Latency from the accepting clock edge to out_valid is
// LATENCY = LAT + 1 cycles, 86 for the default code (the figure the paper
// reports). g tables: with IB_TABLES = 1 (default) each g block uses the
// information-bottleneck table designed for its tree node (ib_tables_pkg);
// with 0 (required for any other code) all use the uniform rule of polar_pkg.
// Only the control path is reset; the datapath registers are not.
module polar_unrolled_dec
  import polar_pkg::*;
#(
  parameter int unsigned   N      = N_DEF,
  parameter int unsigned   K      = K_DEF,
  parameter int unsigned   II     = II_DEF,
  parameter logic [N-1:0]  FROZEN = FROZEN_128_64,
  parameter bit            IB_TABLES = 1'b1    // per-node IB g tables (default code only)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  msg_t [N-1:0]  in_llr,
  output logic          out_valid,
  output logic [N-1:0]  out_cw,
  output logic [K-1:0]  out_info
);
  localparam int unsigned LAT     = subtree_latency(NMAX'(FROZEN), N);

  logic          accept;
  logic [LAT:0]  pulse;
  msg_t [N-1:0]  alpha_c;       // input register, stage 0

  frame_ctrl #(.II(II), .LAT(LAT)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_ready, .accept, .pulse, .out_valid);

  always_ff @(posedge clk)
    if (accept) alpha_c <= in_llr;

  ssc_node #(.NV(N), .FROZEN(FROZEN), .T(0), .II(II), .NODE(1), .IB(IB_TABLES),
             .NP(LAT + 1)) u_root (
    .clk, .pulse, .alpha(alpha_c), .beta(out_cw));

  for (genvar j = 0; j < K; j++) begin : g_info
    assign out_info[j] = out_cw[info_position(NMAX'(FROZEN), N, j)];
  end

  initial begin
    assert (node_kind(NMAX'(FROZEN), N) == MIXED)
      else $error("polar_unrolled_dec: the code needs both frozen and information bits");
    assert ($countones(FROZEN) == N - K)
      else $error("polar_unrolled_dec: FROZEN must have N-K ones");
    assert (!IB_TABLES || (N == 128 && FROZEN == FROZEN_128_64))
      else $error("polar_unrolled_dec: the IB g tables exist only for the default code");
  end

endmodule
