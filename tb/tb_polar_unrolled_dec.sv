// tb_polar_unrolled_dec: end-to-end test of the (128,64) decoder at its
// default parameters (N = 128, K = 64, II = 10).
//
// A source offers frames through the valid/ready handshake: long bursts in
// which it always has a frame waiting (the decoder then accepts one every II
// cycles and the source stalls in between) and idle gaps of random length.
// Frames are systematic codewords of random data sent over BPSK/AWGN at
// several noise levels and quantized by the information-bottleneck channel
// quantizer the g tables were designed for, plus noise-free frames. The
// decoder runs with its per-node information-bottleneck g tables. Checks per frame:
//   * out_valid arrives exactly 86 cycles after the accepting edge;
//   * out_cw equals the sequential SSC reference decoder, and stays stable
//     for II cycles;
//   * out_info equals the data bits whenever out_cw is the sent codeword;
//   * a noise-free frame decodes to the sent codeword.
// It also counts how often each mechanism occurred (back-to-back frames at
// the initiation interval, stalls, gaps, frames whose channel hard decisions
// held errors that the decoder corrected) and fails if one never did.
module tb_polar_unrolled_dec;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 128, K = 64, II = 10, LATENCY = 86;
  localparam int NF = 1500;
  localparam bits_t FZ = bits_t'(FROZEN_128_64);

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid;
  msg_t [N-1:0] in_llr;
  logic [N-1:0] out_cw;
  logic [K-1:0] out_info;

  typedef struct {
    bits_t cw;
    bits_t ref_cw;
    logic [K-1:0] data;
    int accepted_at;
    logic noiseless;
    logic had_errors;
  } frame_t;

  frame_t q [$];
  int cycle = 0, last_acc = -100;
  int checks = 0, failures = 0;
  int sent = 0, received = 0;
  int n_b2b = 0, n_stall = 0, n_gap = 0, n_corrected = 0, n_noiseless = 0, n_frame_err = 0;
  int hold_left = 0;
  logic [N-1:0] held;
  frame_t cur;
  logic have_cur = 1'b0;

  always #5 clk = ~clk;

  polar_unrolled_dec dut (.clk, .rst_n, .in_valid, .in_ready, .in_llr, .out_valid, .out_cw,
                          .out_info);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic frame_t make_frame(int idx, output msg_t [N-1:0] llr);
    frame_t f;
    bits_t pos_data;
    msgs_t y;
    real sigma;
    f.data = {$urandom, $urandom};
    pos_data = '0;
    for (int j = 0; j < int'(K); j++) pos_data[info_position(NMAX'(FZ), N, j)] = f.data[j];
    f.cw = sys_encode(pos_data, FZ, N);
    f.noiseless = (idx % 10 == 0);
    sigma = (idx % 3 == 0) ? 0.60 : ((idx % 3 == 1) ? 0.71 : 0.85);
    f.had_errors = 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      y[i] = f.noiseless ? {~f.cw[i], 3'd7} : awgn_label_ib(f.cw[i], sigma);
      llr[i] = y[i];
      if (hd_ref(y[i]) != f.cw[i]) f.had_errors = 1'b1;
    end
    f.ref_cw = ssc_decode(y, FZ, N, 1'b1);
    return f;
  endfunction

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
  end

  // source
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        cur.accepted_at = cycle;
        q.push_back(cur);
        if (cycle - last_acc == int'(II)) n_b2b++;
        else if (sent > 0) n_gap++;
        last_acc = cycle;
        sent++;
        have_cur = 1'b0;
      end
      if (in_valid && !in_ready) n_stall++;
      if (!have_cur && sent < NF && (cycle % 400 < 250 || $urandom % 8 == 0)) begin
        msg_t [N-1:0] llr;
        cur = make_frame(sent, llr);
        in_llr <= llr;
        have_cur = 1'b1;
      end
      in_valid <= have_cur;
    end
  end

  // sink
  always @(negedge clk) begin
    if (hold_left > 0) begin
      checks++;
      if (out_cw !== held) failures++;
      hold_left--;
    end
    if (out_valid) begin
      frame_t f;
      received++;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("out_valid with no frame in flight at cycle %0d", cycle);
      end else begin
        f = q.pop_front();
        checks++;
        if (cycle - f.accepted_at != LATENCY) begin
          failures++;
          $display("latency %0d, expected %0d", cycle - f.accepted_at, LATENCY);
        end
        checks++;
        if (out_cw !== f.ref_cw[N-1:0]) begin
          failures++;
          if (failures < 10) $display("frame %0d: codeword differs from reference", received);
        end
        if (out_cw === f.cw[N-1:0]) begin
          checks++;
          if (out_info !== f.data) failures++;
          if (f.had_errors) n_corrected++;
        end else n_frame_err++;
        if (f.noiseless) begin
          n_noiseless++;
          checks++;
          if (out_cw !== f.cw[N-1:0]) failures++;
        end
      end
      held = out_cw;
      hold_left = int'(II) - 1;
    end
    if (received == NF) begin
      $display("frames %0d: back-to-back %0d, after a gap %0d, stall cycles %0d",
               received, n_b2b, n_gap, n_stall);
      $display("noise-free %0d, channel errors corrected %0d, frames in error %0d",
               n_noiseless, n_corrected, n_frame_err);
      checks++;
      if (n_b2b == 0 || n_gap == 0 || n_stall == 0 || n_corrected == 0 || n_noiseless == 0)
        failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
