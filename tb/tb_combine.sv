// tb_combine: C block against one level of the polar transform.
module tb_combine;
  localparam int unsigned NV = 16;
  logic [NV/2-1:0] bl, br;
  logic [NV-1:0] bv;
  int checks = 0, failures = 0;

  combine #(.NV(NV)) dut (.beta_l(bl), .beta_r(br), .beta_v(bv));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      bl = (NV/2)'($urandom);
      br = (NV/2)'($urandom);
      #1;
      for (int i = 0; i < NV/2; i++) begin
        checks += 2;
        if (bv[i] !== (bl[i] ^ br[i])) failures++;
        if (bv[i + NV/2] !== br[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
