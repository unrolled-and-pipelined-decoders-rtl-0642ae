// tb_hold_delay: partially pipelined delay lines of several lengths.
//
// Frames start at cycles a_k spaced II or more apart. The source of a line
// holds frame k's value from a_k + T_SRC until the next frame replaces it,
// like a stage register. Each line must present frame k's value during the
// whole window [a_k + T_DST, a_k + T_DST + II). Back-to-back frames and gaps
// both occur.
module tb_hold_delay;
  localparam int unsigned II = 4;
  localparam int unsigned NC = 4;
  localparam int unsigned TS [NC] = '{0, 0, 1, 2};
  localparam int unsigned TD [NC] = '{1, 4, 6, 11};   // D = 1, 4, 5, 9
  localparam int unsigned NP = 16;
  localparam int NF = 200;

  logic clk = 1'b0;
  logic [NP-1:0] pulse;
  logic [7:0] d [NC];
  logic [7:0] q [NC];
  int starts [NF];
  logic [7:0] vals [NF];
  int cycle = 0;
  int checks = 0, failures = 0, gaps = 0, back_to_back = 0;

  always #5 clk = ~clk;

  for (genvar c = 0; c < NC; c++) begin : g_dut
    hold_delay #(.W(8), .T_SRC(TS[c]), .T_DST(TD[c]), .II(II), .NP(NP)) dut (
      .clk, .pulse, .d(d[c]), .q(q[c]));
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame schedule
  initial begin
    int t;
    t = 2;
    for (int k = 0; k < NF; k++) begin
      int gap;
      starts[k] = t;
      vals[k] = 8'($urandom);
      gap = ($urandom % 3 == 0) ? int'($urandom % 4) : 0;
      if (k > 0) begin
        if (gap == 0) back_to_back++;
        else gaps++;
      end
      t += II + gap;
    end
  end

  // drive pulse and sources for the current cycle, then check after the edge
  always @(negedge clk) begin
    pulse = '0;
    for (int k = 0; k < NF; k++)
      for (int s = 0; s < NP; s++)
        if (cycle == starts[k] + s) pulse[s] = 1'b1;
    for (int c = 0; c < NC; c++) begin
      d[c] = 8'hxx;
      for (int k = 0; k < NF; k++)
        if (cycle >= starts[k] + int'(TS[c])) d[c] = vals[k];
    end
  end

  always @(posedge clk) begin
    #1;
    cycle++;
    // q is now the value seen during cycle `cycle`
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < NF; k++)
        if (cycle >= starts[k] + int'(TD[c]) && cycle < starts[k] + int'(TD[c]) + int'(II)) begin
          checks++;
          if (q[c] !== vals[k]) begin
            failures++;
            if (failures < 10)
              $display("line %0d frame %0d cycle %0d got %h exp %h", c, k, cycle, q[c], vals[k]);
          end
        end
    if (cycle == starts[NF-1] + 20) begin
      if (gaps == 0 || back_to_back == 0) failures++;
      $display("back-to-back frames %0d, frames after a gap %0d", back_to_back, gaps);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
