// hard_dec: I block, hard decisions on a vector of messages.
//
// A label in the upper half of the alphabet (MSB = 1) stands for a positive
// LLR and is decided as bit 0, so each bit estimate is the inverted MSB of
// its message: one inverter per bit, as the paper describes for its LUT-based
// decoders. Used at the leaves and for rate-1 subtrees. Combinational.
module hard_dec
  import polar_pkg::*;
#(
  parameter int unsigned NV = 1
) (
  input  msg_t [NV-1:0] t,
  output logic [NV-1:0] bits
);
  always_comb
    for (int unsigned i = 0; i < NV; i++) bits[i] = ~t[i][TW-1];

endmodule
