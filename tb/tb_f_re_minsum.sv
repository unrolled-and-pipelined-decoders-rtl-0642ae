// tb_f_re_minsum: exhaustive check of the re-MS-IB f block against eq. (5)
// evaluated in the original alphabet (tb_ref_pkg::f_ref).
module tb_f_re_minsum;
  import polar_pkg::*;
  import tb_ref_pkg::*;

  msg_t ta, tb, to;
  int checks = 0, failures = 0;

  f_re_minsum dut (.ta, .tb, .to);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) begin
        ta = msg_t'(a);
        tb = msg_t'(b);
        #1;
        checks++;
        if (to !== f_ref(ta, tb)) begin
          failures++;
          $display("f mismatch ta=%0d tb=%0d got %0d exp %0d", ta, tb, to, f_ref(ta, tb));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
