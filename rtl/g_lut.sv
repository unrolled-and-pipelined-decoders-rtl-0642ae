// g_lut: g / g0R block of the LUT-based decoder.
//
// The right-child message is read from a table addressed by
// {beta_l[i], alpha_v[i+N_v/2], alpha_v[i]} (1 + 4 + 4 = 9 address bits,
// 512 entries of 4 bits). The table is a parameter, so each decoder-tree edge
// can carry its own table as in the paper, where every edge has a table
// designed with the information-bottleneck method; synthesis turns the
// constant table into logic. g0R is the same block with beta tied to 0.
// The default table is polar_pkg::g_default_table(), a uniform-grid rule
// (see polar_pkg); the decoder of the default (128,64) code instead passes
// each node its information-bottleneck table from ib_tables_pkg.
// Combinational.
module g_lut
  import polar_pkg::*;
#(
  parameter g_table_t LUT = g_default_table()
) (
  input  msg_t ta,     // alpha_v[i]
  input  msg_t tb,     // alpha_v[i + N_v/2]
  input  logic beta,   // beta_l[i]
  output msg_t to      // alpha_r[i]
);
  assign to = LUT[{beta, tb, ta}];

endmodule
