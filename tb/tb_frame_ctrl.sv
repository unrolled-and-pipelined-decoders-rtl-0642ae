// tb_frame_ctrl: frame admission at the initiation interval and stage pulses.
//
// A reference model tracks the cycle of every acceptance. Checks: in_ready is
// high exactly when II or more cycles have passed since the last acceptance,
// pulse[k] is high exactly k+1 cycles after an acceptance, and out_valid
// comes LAT+1 cycles after it. Stalls (in_valid while not ready) must occur.
module tb_frame_ctrl;
  localparam int unsigned II  = 10;
  localparam int unsigned LAT = 23;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic in_ready, accept, out_valid;
  logic [LAT:0] pulse;
  int cycle = 0, last_acc = -1000;
  int acc_hist [$];
  int checks = 0, failures = 0, stalls = 0, accepts = 0, outs = 0;

  always #5 clk = ~clk;

  frame_ctrl #(.II(II), .LAT(LAT)) dut (.clk, .rst_n, .in_valid, .in_ready, .accept,
                                        .pulse, .out_valid);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
  end

  // stimulus: bursts of continuous requests and idle stretches
  always @(negedge clk) begin
    cycle++;
    if (rst_n) in_valid = (cycle % 97 < 60) ? 1'b1 : ($urandom % 4 == 0);
    // combinational checks for this cycle
    if (rst_n) begin
      logic exp_ready;
      exp_ready = (cycle - last_acc) >= int'(II);
      checks++;
      if (in_ready !== exp_ready) begin
        failures++;
        $display("cycle %0d in_ready %0d exp %0d", cycle, in_ready, exp_ready);
      end
      for (int k = 0; k <= int'(LAT); k++) begin
        logic exp_p;
        exp_p = 1'b0;
        foreach (acc_hist[i]) if (cycle == acc_hist[i] + k + 1) exp_p = 1'b1;
        checks++;
        if (pulse[k] !== exp_p) failures++;
      end
      if (out_valid) begin
        outs++;
        checks++;
        if (acc_hist.size() == 0 || acc_hist[0] + int'(LAT) + 1 != cycle) failures++;
        else void'(acc_hist.pop_front());
      end
      if (in_valid && !in_ready) stalls++;
      if (in_valid && in_ready) begin
        accepts++;
        last_acc = cycle;
        acc_hist.push_back(cycle);
      end
    end
    if (cycle == 3000) begin
      checks++;
      if (stalls == 0 || accepts < 50 || outs < accepts - 3) failures++;
      $display("accepts %0d, outputs %0d, stall cycles %0d", accepts, outs, stalls);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
