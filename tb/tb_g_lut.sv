// tb_g_lut: exhaustive check of the g / g0R table against the LLR-domain
// rule of tb_ref_pkg::g_ref, plus a per-edge table override, plus the
// information-bottleneck tables of two decoder-tree nodes checked against
// tb_ref_pkg::g_ref_ib.
module tb_g_lut;
  import polar_pkg::*;
  import ib_tables_pkg::*;
  import tb_ref_pkg::*;

  // a custom table (entry = address bits 3:0 inverted) to show the override
  function automatic g_table_t custom_table();
    g_table_t t;
    for (int a = 0; a < 512; a++) t[a] = ~msg_t'(a);
    return t;
  endfunction

  msg_t ta, tb, to, to_c, to_1, to_3;
  logic beta;
  int checks = 0, failures = 0;

  g_lut dut (.ta, .tb, .beta, .to);
  g_lut #(.LUT(custom_table())) dut_c (.ta, .tb, .beta, .to(to_c));
  g_lut #(.LUT(ib_g_table(1)))  dut_1 (.ta, .tb, .beta, .to(to_1));
  g_lut #(.LUT(ib_g_table(3)))  dut_3 (.ta, .tb, .beta, .to(to_3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int bb = 0; bb < 2; bb++)
      for (int a = 0; a < 16; a++)
        for (int b = 0; b < 16; b++) begin
          ta = msg_t'(a); tb = msg_t'(b); beta = bb[0];
          #1;
          checks++;
          if (to !== g_ref(ta, tb, beta)) begin
            failures++;
            $display("g mismatch ta=%0d tb=%0d beta=%0d got %0d exp %0d",
                     ta, tb, beta, to, g_ref(ta, tb, beta));
          end
          checks++;
          if (to_c !== ~ta) failures++;
          checks++;
          if (to_1 !== g_ref_ib(1, ta, tb, beta)) begin
            failures++;
            $display("node 1 mismatch ta=%0d tb=%0d beta=%0d got %0d exp %0d",
                     ta, tb, beta, to_1, g_ref_ib(1, ta, tb, beta));
          end
          checks++;
          if (to_3 !== g_ref_ib(3, ta, tb, beta)) failures++;
        end
    // spot values: +0.5 + +0.5 -> +1 (label 9); beta=1: +0.5 - +0.5 -> 0 (label 8)
    ta = 4'd8; tb = 4'd8; beta = 1'b0; #1; checks++; if (to !== 4'd9) failures++;
    beta = 1'b1; #1; checks++; if (to !== 4'd8) failures++;
    // -7.5 + -7.5 saturates at the most negative label (relabeled 7)
    ta = 4'd7; tb = 4'd7; beta = 1'b0; #1; checks++; if (to !== 4'd7) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
