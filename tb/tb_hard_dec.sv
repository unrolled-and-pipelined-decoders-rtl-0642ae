// tb_hard_dec: the I block decides 1 exactly for negative-LLR labels.
module tb_hard_dec;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NV = 16;
  msg_t [NV-1:0] t;
  logic [NV-1:0] bits;
  int checks = 0, failures = 0;

  hard_dec #(.NV(NV)) dut (.t, .bits);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 64; r++) begin
      for (int i = 0; i < NV; i++) t[i] = msg_t'((r == 0) ? i : $urandom);
      #1;
      for (int i = 0; i < NV; i++) begin
        checks++;
        if (bits[i] !== hd_ref(t[i])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
