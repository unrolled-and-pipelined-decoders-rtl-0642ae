// combine: C block, bit-estimate combination of a decoder-tree node.
//
// beta_v[i] = beta_l[i] xor beta_r[i] for i < NV/2 and beta_v[i] = beta_r[i-NV/2]
// above, i.e. one level of the polar transform x = u F applied to the two
// child estimates. Combinational; ssc_node registers its output.
module combine #(
  parameter int unsigned NV = 2
) (
  input  logic [NV/2-1:0] beta_l,
  input  logic [NV/2-1:0] beta_r,
  output logic [NV-1:0]   beta_v
);
  assign beta_v = {beta_r, beta_l ^ beta_r};

endmodule
