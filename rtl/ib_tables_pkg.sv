// ib_tables_pkg: information-bottleneck g tables of the default (128,64) code.
//
// For a binary input, a mutual-information-maximizing quantizer is contiguous
// in LLR, so every g table is fully described by two short lists:
//   lev[m] : LLR of the node's positive label with magnitude index m (the
//            negative label {0,m} has -lev[m]);
//   th[k]  : the k-th cluster boundary of the g output.
// The table entry for (t_a, t_b, beta) is computed from
//   L = lev(t_b) + lev(t_a)  (beta = 0)   or   lev(t_b) - lev(t_a)  (beta = 1),
// output magnitude index = number of th[k] <= |L|, output sign positive for
// L >= 0. All values are LLRs scaled by 2**10. Entry p belongs to the g (or
// g0R) block of decoder-tree node p, numbered as a heap (root 1, children of
// p are 2p and 2p+1).
//
// The numbers come from a density-evolution pass over the (128,64) code
// (frozen set polar_pkg::FROZEN_128_64) at Eb/N0 = 3.0 dB, sigma^2 = 0.501:
// the channel is quantized to 16 labels by an information-bottleneck
// quantizer, f outputs follow the min-sum rule on labels, and each g output
// is quantized by an information-bottleneck quantizer, found as the optimal
// contiguous, sign-symmetric partition of the g input LLRs into 16 clusters
// (dynamic programming over the sorted LLRs). They are valid only for that
// code and design point.
package ib_tables_pkg;

  localparam int unsigned IB_SCALE_LOG2 = 10;

  typedef struct packed {
    logic             known;   // node has a g block in the default code
    logic [7:0][15:0] lev;
    logic [6:0][15:0] th;
  } ib_node_t;

  typedef logic [3:0] ib_table_t [512];   // addressed by {beta, t_b, t_a}

  // Per-node table description.
  function automatic ib_node_t ib_node(int unsigned p);
    ib_node_t n;
    logic [239:0] v;
    v = '0;
    n = '0;
    n.known = 1'b1;
    // lev[7..0] followed by th[6..0], 16-bit hexadecimal fields
    case (p)
      1: v = 240'h1a61_1282_0de8_0a83_07c0_0554_031a_00ff_1c6b_1449_0e42_0a16_068a_03bf_00ff;
      2: v = 240'h179c_114e_0d02_09c7_0725_04d8_02c3_00df_157f_0f32_0b52_0888_0611_036e_00df;
      3: v = 240'h22f8_17cb_1117_0c06_082f_0523_0280_0000_24a5_19c9_131f_0ded_09e6_0631_0140;
      4: v = 240'h14d6_0f7d_0b9b_089c_0628_040c_0233_00a6_1233_0d8c_09ce_0738_0505_0333_00a6;
      5: v = 240'h1a75_11f9_0d32_09ea_075f_04b4_023d_0000_1b2c_1374_0df1_0a41_0662_03e1_011e;
      6: v = 240'h2032_1717_10ab_0bbe_07fd_04fe_026a_0001_1e6e_152b_0ead_0ae0_0714_044b_0136;
      7: v = 240'h302c_1f05_166a_108b_0bc6_07eb_041e_0000_2e32_1d54_1589_0f2a_09a1_06c3_01e6;
      9: v = 240'h15df_0f9a_0b6c_087c_0630_0423_020b_0000_14d9_0f1d_0af9_07c2_05b5_0383_0106;
     10: v = 240'h17af_10f0_0c71_0951_06e1_0452_0202_0000_1859_11ca_0d21_09b1_0689_0392_0101;
     11: v = 240'h2306_16f4_109d_0c39_085f_050e_029e_0000_269a_1b54_13c8_0db6_08fd_057f_0138;
     12: v = 240'h1d6c_15e4_0fe9_0b39_079d_04b7_0240_0001_19a8_11ab_0ce7_0934_063e_040e_0120;
     13: v = 240'h2762_194d_11cf_0ca2_08e0_05a9_0303_0000_28e4_1b88_143b_0f38_0a78_067f_0153;
     14: v = 240'h2d66_1ec9_1651_107d_0bbe_07e5_041b_0001_2e56_1fe1_17ef_1159_0b28_06bb_01e6;
     19: v = 240'h19b9_118f_0ce7_094a_067d_044e_0231_0000_1cf9_1496_0e58_0a00_07a1_05b3_0335;
     21: v = 240'h1db9_14d5_0f53_0b68_081b_050d_026b_0000_1f65_1637_1119_0c11_07c9_0460_0135;
     22: v = 240'h2040_166b_104d_0c01_0837_04f3_028e_0000_2400_1a23_1229_0c95_08d5_0562_0133;
     23: v = 240'h3213_2056_176e_109e_0b89_0750_03ca_0000_2d14_1da5_15f0_0dba_0a34_05f3_01c3;
     24: v = 240'h1aa7_140d_0eac_0a55_06f4_0439_01f5_0001_175a_1013_0b94_080c_0530_030e_00fb;
     25: v = 240'h200a_14ea_0f0d_0af7_079a_04f8_02d6_0000_2175_1734_1170_0cf1_0908_0552_0111;
     26: v = 240'h249d_18ea_119c_0c82_08ca_0599_02f9_0000_2681_1b1c_13f3_0f0f_0a5e_066d_0150;
     28: v = 240'h2aa0_1e54_161f_1060_0bac_07d9_0414_0001_2846_1d02_1550_0efc_097d_06ac_01e3;
     39: v = 240'h2362_1835_114a_0c22_08b3_06a8_045d_0238_26ac_1ba1_1456_0dd5_09c1_062a_03e5;
     42: v = 240'h1af4_13d5_0ea1_0ae0_07b0_04bd_023b_0000_191c_1215_0dde_0a65_0767_041c_011e;
     43: v = 240'h2786_1a2a_1391_0e7d_09c5_0625_030f_0000_2c20_1f08_15a1_0f33_0a9d_0599_0187;
     44: v = 240'h1d7a_157a_0fbb_0b9a_07ea_04bf_026d_0000_1e78_1662_114e_0c21_0896_052b_0129;
     45: v = 240'h2d36_1eb3_160b_0f52_0ab3_0731_03b4_0000_2acc_1c1e_1383_0d00_09ae_05ac_01bf;
     46: v = 240'h2f4d_202a_175c_1095_0b84_074c_03c8_0000_29c2_1a01_11b2_0db3_0a2e_05ec_01c2;
     49: v = 240'h1b76_12f0_0dbf_09b8_0696_0433_024f_0000_1eb7_1631_0f65_0b1c_07e8_04e7_00f2;
     50: v = 240'h1d44_143a_0ea2_0aa9_0760_04cd_02b9_0000_1f70_167a_1068_0b49_087d_051f_010a;
     51: v = 240'h2c5e_1bf7_1423_0f1d_0af0_06fe_039d_0000_29ea_1c9c_136e_0e44_09e7_0602_01b0;
     52: v = 240'h21d7_1835_113a_0c45_089f_057b_02e6_0000_1fe2_1623_0f61_0a4c_07ae_044e_014a;
     53: v = 240'h32c5_2087_178d_11b4_0ca6_0830_0453_0000_30ab_1f0c_16ca_0fdf_0bb5_0705_01ef;
     56: v = 240'h27db_1d80_15c2_1027_0b89_07c1_0406_0001_248b_1abc_13bc_0ec2_094f_068f_01df;
     85: v = 240'h1f5d_1503_0fc0_0c2d_090c_05d2_02d9_0000_2057_1717_10df_0aff_07af_046b_016c;
     86: v = 240'h24c0_19b2_1351_0e50_09a8_0611_0303_0000_240e_18ad_1260_0cf5_08a9_0583_0181;
     89: v = 240'h259e_19fb_13ca_0ea4_0a69_0701_038a_0000_2699_1b00_1362_0d5f_0882_05ac_01b4;
     90: v = 240'h2a70_1e50_15da_0f38_0aa3_0726_03ad_0000_242f_1859_1081_0d36_098c_059c_01bd;
     92: v = 240'h2c87_1fd5_1738_1082_0b79_0746_03c4_0000_262e_19c6_11a0_0da5_0a23_05df_01c1;
     99: v = 240'h2523_19ae_1258_0d28_0981_0665_034c_0000_2283_1752_1166_0bb4_0817_046c_018c;
    101: v = 240'h27a8_1adf_1380_0dd3_09f6_06d8_0380_0000_29ed_1c8e_15d6_0eea_0875_04c5_018f;
    102: v = 240'h2998_1bb8_1406_0f0c_0ae5_06f6_0399_0000_2e77_20f9_16d0_0fbd_09d8_05f9_01af;
    105: v = 240'h2993_1a70_128a_0cc5_08ca_05f5_031e_0000_2b22_1e6f_1658_10bc_0ad4_0686_016b;
    106: v = 240'h2fff_2056_177b_11aa_0ca0_082c_0451_0000_2a69_1d27_1563_1001_0bac_06ff_01ee;
      default: n.known = 1'b0;
    endcase
    n.lev = v[239:112];
    n.th  = v[111:0];
    return n;
  endfunction

  // Expand node p's description into its 512-entry g table (relabeled
  // alphabet: label {s, m} stands for +lev[m] if s = 1, -lev[m] if s = 0).
  function automatic ib_table_t ib_g_table(int unsigned p);
    ib_table_t tab;
    ib_node_t  n;
    n = ib_node(p);
    for (int a = 0; a < 512; a++) begin
      int la, lb, l, mag;
      logic [8:0] ad;
      ad  = 9'(a);
      la  = int'(n.lev[ad[2:0]]);
      lb  = int'(n.lev[ad[6:4]]);
      if (!ad[3]) la = -la;
      if (!ad[7]) lb = -lb;
      l   = ad[8] ? lb - la : lb + la;
      mag = 0;
      for (int k = 0; k < 7; k++)
        if (int'(n.th[k]) <= (l < 0 ? -l : l)) mag++;
      tab[a] = {l >= 0, 3'(mag)};
    end
    return tab;
  endfunction

endpackage
