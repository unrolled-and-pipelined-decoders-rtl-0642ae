// tb_polar_fer: error-correction run of the (128,64) decoder at its default
// parameters, in the manner of an FER/BER curve over BPSK/AWGN.
//
// For each Eb/N0 point (2, 3 and 4 dB, rate 1/2, so sigma^2 = 1/(Eb/N0))
// NPT random systematic codewords are sent through the channel and the
// information-bottleneck channel quantizer and decoded back to back, one
// frame every II = 10 cycles. Every output is checked against the
// sequential reference decoder (bit-exact) and for the 86-cycle latency, and
// every acceptance for the II-cycle spacing (throughput 64 bits / 10 cycles).
// The measured frame error rate at each point must lie in a band around
// the rate that a separate software model of the same decoder gives with
// 50 000 frames per point (1.6e-1, 3.2e-2 and 2.8e-3); the bands allow for
// the statistical spread of NPT frames. The table printed at the end holds
// FER and the information-bit error rate.
module tb_polar_fer;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 128, K = 64, II = 10, LATENCY = 86;
  localparam int NPT = 8000;
  localparam int NPOINT = 3;
  localparam real EBN0_DB [NPOINT] = '{2.0, 3.0, 4.0};
  localparam real FER_LO  [NPOINT] = '{0.13, 0.022, 0.0008};
  localparam real FER_HI  [NPOINT] = '{0.20, 0.043, 0.006};
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
  } frame_t;

  frame_t q [$];
  frame_t cur;
  int cycle = 0, made = 0, received = 0, last_acc = -1;
  int checks = 0, failures = 0;
  int frame_err [NPOINT];
  int bit_err [NPOINT];

  always #5 clk = ~clk;

  polar_unrolled_dec dut (.clk, .rst_n, .in_valid, .in_ready, .in_llr, .out_valid, .out_cw,
                          .out_info);

  initial begin
    #5000000;
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
    sigma = $sqrt(1.0 / (10.0 ** (EBN0_DB[idx / NPT] / 10.0)));
    for (int i = 0; i < int'(N); i++) begin
      y[i] = awgn_label_ib(f.cw[i], sigma);
      llr[i] = y[i];
    end
    f.ref_cw = ssc_decode(y, FZ, N, 1'b1);
    return f;
  endfunction

  initial begin
    for (int k = 0; k < NPOINT; k++) begin
      frame_err[k] = 0;
      bit_err[k]   = 0;
    end
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
  end

  // source: always has the next frame waiting
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        cur.accepted_at = cycle;
        q.push_back(cur);
        // the source never runs dry, so frames must enter every II cycles
        if (last_acc >= 0) begin
          checks++;
          if (cycle - last_acc != int'(II)) failures++;
        end
        last_acc = cycle;
      end
      if ((!in_valid || in_ready) && made < NPT * NPOINT) begin
        msg_t [N-1:0] llr;
        cur = make_frame(made, llr);
        made++;
        in_llr <= llr;
        in_valid <= 1'b1;
      end else if (in_valid && in_ready) begin
        in_valid <= 1'b0;
      end
    end
  end

  // sink
  always @(negedge clk) begin
    if (out_valid) begin
      frame_t f;
      int pt;
      pt = received / NPT;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("out_valid with no frame in flight at cycle %0d", cycle);
      end else begin
        f = q.pop_front();
        checks++;
        if (cycle - f.accepted_at != LATENCY) failures++;
        checks++;
        if (out_cw !== f.ref_cw[N-1:0]) failures++;
        if (out_cw !== f.cw[N-1:0]) frame_err[pt]++;
        bit_err[pt] += $countones(out_info ^ f.data);
      end
      received++;
    end
    if (received == NPT * NPOINT) begin
      $display("Eb/N0 (dB)  frames  frame errors  FER       info BER");
      for (int k = 0; k < NPOINT; k++) begin
        real fer, ber;
        fer = real'(frame_err[k]) / real'(NPT);
        ber = real'(bit_err[k]) / real'(NPT * int'(K));
        $display("%6.1f      %0d    %6d        %8.2e  %8.2e", EBN0_DB[k], NPT, frame_err[k],
                 fer, ber);
        checks++;
        if (fer < FER_LO[k] || fer > FER_HI[k]) begin
          failures++;
          $display("FER at %0.1f dB outside [%0.4f, %0.4f]", EBN0_DB[k], FER_LO[k], FER_HI[k]);
        end
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
