// tb_ssc_node: decoder-tree nodes against the sequential SSC reference.
//
// Three trees are driven like the top level drives its root: an input
// register loaded once per frame, a pulse train marking each stage, frames
// spaced II cycles or more apart. Configurations:
//   0: the (8,5) code of the paper's example, deeply pipelined (II = 1),
//      whose pipeline has 5 stages after the input register;
//   1: the same code with II = 2 (partial pipelining);
//   2: a 32-leaf code with II = 3 that also has a rate-0 right child.
// Each output must equal ssc_decode() of its frame for II cycles starting
// LAT cycles after the frame entered the input register.
module tb_ssc_node;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  localparam int NC = 3;
  localparam int unsigned NVS [NC] = '{8, 8, 32};
  localparam int unsigned IIS [NC] = '{1, 2, 3};
  localparam logic [31:0] MASKS [NC] = '{32'h07, 32'h07, 32'h00C1_177F};
  localparam int NF = 150;

  logic clk = 1'b0;
  int checks = 0, failures = 0;
  int done [NC];

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    localparam int unsigned NV  = NVS[c];
    localparam int unsigned II  = IIS[c];
    localparam logic [NV-1:0] FZ = MASKS[c][NV-1:0];
    localparam int unsigned LAT = subtree_latency(NMAX'(FZ), NV);

    logic [LAT:0]  pulse = '0;
    msg_t [NV-1:0] alpha;
    logic [NV-1:0] beta;
    bits_t expv [NF];
    int start [NF];
    int cycle = 0, nxt = 0, k = 0, gap = 0;

    ssc_node #(.NV(NV), .FROZEN(FZ), .T(0), .II(II), .NP(LAT + 1)) dut (
      .clk, .pulse, .alpha, .beta);

    if (c == 0) begin : g_lat
      initial begin
        checks++;
        if (LAT != 5) begin
          failures++;
          $display("(8,5) pipeline depth %0d, expected 5", LAT);
        end
      end
    end

    always @(posedge clk) begin
      cycle <= cycle + 1;
      pulse <= {pulse[LAT-1:0], 1'b0};
      if (cycle == nxt && k < NF) begin
        msgs_t y;
        bits_t cw;
        // odd frames: noisy codewords; even frames: arbitrary labels
        cw = sys_encode(bits_t'({$urandom, $urandom, $urandom, $urandom}),
                        bits_t'(FZ) | ~bits_t'({NV{1'b1}}), NV);
        for (int i = 0; i < MAXN; i++) y[i] = '0;
        for (int i = 0; i < int'(NV); i++) begin
          y[i] = k[0] ? awgn_label(cw[i], 0.9) : lbl_t'($urandom);
          alpha[i] <= y[i];
        end
        expv[k]  = ssc_decode(y, bits_t'(FZ) | ~bits_t'({NV{1'b1}}), NV);
        start[k] = cycle + 1;
        pulse[0] <= 1'b1;
        gap = ($urandom % 4 == 0) ? int'($urandom % 3) : 0;
        nxt <= cycle + int'(II) + gap;
        k <= k + 1;
      end
    end

    // compare in the middle of each cycle
    always @(negedge clk) begin
      for (int f = 0; f < k; f++)
        if (cycle >= start[f] + int'(LAT) && cycle < start[f] + int'(LAT) + int'(II)) begin
          checks++;
          if (beta !== expv[f][NV-1:0]) begin
            failures++;
            if (failures < 10)
              $display("cfg %0d frame %0d cycle %0d got %h exp %h", c, f, cycle, beta,
                       expv[f][NV-1:0]);
          end
        end
      if (k == NF && cycle > start[NF-1] + int'(LAT) + int'(II) + 2) done[c] = 1;
    end
  end

  initial begin
    done = '{default: 0};
    wait (done[0] == 1 && done[1] == 1 && done[2] == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
