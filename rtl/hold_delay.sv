// hold_delay: partially pipelined delay line for a W-bit vector.
//
// In a fully pipelined unrolled decoder a value needed D stages later travels
// through D registers. With an initiation interval of II cycles each frame's
// value only has to be held II cycles per register, so this delay line uses
// M = ceil(D/II) load-enabled registers instead (the paper's removal of
// redundant registers; the exact placement is this design's own).
//
// Timing. Stage numbers count register boundaries from the decoder input
// register. A frame's data sits in a stage-s register from cycle a+s for at
// least II cycles, where a is the first cycle the input register holds the
// frame; pulse[k] is high in cycle a+k. The source d is stable from a+T_SRC,
// and q is stable from a+T_DST for II cycles. Register j (0 = first) loads at
// the end of cycle a + T_DST - 1 - (M-1-j)*II.
module hold_delay #(
  parameter int unsigned W     = 4,
  parameter int unsigned T_SRC = 0,
  parameter int unsigned T_DST = 1,
  parameter int unsigned II    = 10,
  parameter int unsigned NP    = T_DST + 1
) (
  input  logic          clk,
  input  logic [NP-1:0] pulse,
  input  logic [W-1:0]  d,
  output logic [W-1:0]  q
);
  localparam int unsigned D = T_DST - T_SRC;
  localparam int unsigned M = (D + II - 1) / II;

  logic [W-1:0] r [M];

  for (genvar j = 0; j < M; j++) begin : g_reg
    localparam int unsigned LOAD_AT = T_DST - 1 - (M - 1 - j) * II;
    if (j == 0) begin : g_first
      always_ff @(posedge clk)
        if (pulse[LOAD_AT]) r[j] <= d;
    end else begin : g_next
      always_ff @(posedge clk)
        if (pulse[LOAD_AT]) r[j] <= r[j-1];
    end
  end

  assign q = r[M-1];

  initial begin
    assert (T_DST > T_SRC) else $error("hold_delay needs T_DST > T_SRC");
    assert (NP > T_DST - 1) else $error("hold_delay: pulse vector too short");
  end

endmodule
