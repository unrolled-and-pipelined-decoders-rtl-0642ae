// f_re_minsum: f block of the re-MS-IB decoder (min-sum on relabeled labels).
//
// With the relabeled alphabet (see polar_pkg) a message is {s, m}: sign bit s
// (1 = positive LLR) and magnitude index m. The min-sum check-node rule then
// needs no pre- or post-processing: the output sign is XNOR of the two sign
// bits and the output magnitude is the smaller of the two magnitudes, chosen
// by one comparator and one multiplexer (select = ma > mb, input 0 = ma,
// input 1 = mb). This is the circuit of the paper's re-MS-IB f block.
// Purely combinational; one instance per message pair of a decoder-tree node.
module f_re_minsum
  import polar_pkg::*;
(
  input  msg_t ta,
  input  msg_t tb,
  output msg_t to
);
  logic a_gt_b;

  assign a_gt_b       = ta[MW-1:0] > tb[MW-1:0];
  assign to[TW-1]     = ~(ta[TW-1] ^ tb[TW-1]);
  assign to[MW-1:0]   = a_gt_b ? tb[MW-1:0] : ta[MW-1:0];

endmodule
