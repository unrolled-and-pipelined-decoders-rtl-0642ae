// frame_ctrl: frame admission and stage timing of the unrolled decoder.
//
// A frame is accepted (in_valid && in_ready) at most once every II cycles:
// after an acceptance in_ready stays low for II-1 cycles, which is the
// initiation interval of the partially pipelined decoder. The decoder input
// register loads on `accept`. A one-hot pulse then walks down pulse[]:
// pulse[k] is high in the k-th cycle after the input register was loaded, so
// pulse[k] marks when stage k holds a new frame. The partial-pipelining delay
// registers use these pulses as load enables. out_valid = pulse[LAT] flags
// the cycle in which the decoded codeword register (stage LAT) first holds
// the frame; it stays there for at least II cycles.
// Latency from acceptance to out_valid is LAT+1 cycles. The valid/ready
// handshake and the asynchronous active-low reset are this design's choices.
module frame_ctrl #(
  parameter int unsigned II  = 10,
  parameter int unsigned LAT = 85
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  output logic           accept,
  output logic [LAT:0]   pulse,
  output logic           out_valid
);
  localparam int unsigned CW = $clog2(II + 1);

  logic [CW-1:0] wait_cnt;   // cycles still to wait before the next frame

  assign in_ready  = (wait_cnt == '0);
  assign accept    = in_valid && in_ready;
  assign out_valid = pulse[LAT];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wait_cnt <= '0;
      pulse    <= '0;
    end else begin
      if (accept)              wait_cnt <= CW'(II - 1);
      else if (wait_cnt != '0) wait_cnt <= wait_cnt - 1'b1;
      pulse <= {pulse[LAT-1:0], accept};
    end

  // at most one frame per II cycles
  if (II > 1) begin : g_chk
    a_spacing : assert property (@(posedge clk) disable iff (!rst_n)
                                 accept |=> !accept [* (II - 1)]);
  end

endmodule
