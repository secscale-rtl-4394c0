// aes_pkg: the AES round functions (FIPS-197) used by aes256_core.
//
// The S-box and its inverse are the tables of FIPS-197 (Fig. 7 and 14),
// i.e. the multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1 followed
// by the affine map s = x ^ rotl(x,1) ^ rotl(x,2) ^ rotl(x,3) ^ rotl(x,4) ^
// 8'h63; the testbench reference recomputes them independently.  A 128-bit
// AES state holds byte 0 in bits [127:120]; column c is bytes 4c..4c+3.
package aes_pkg;

  function automatic logic [7:0] xtime(logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p, x;
    p = 8'h00;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  // entry i sits in bits [8i+7:8i]; each row holds entries 16r+15 .. 16r
  localparam logic [2047:0] SBOX = {
    128'h16_bb_54_b0_0f_2d_99_41_68_42_e6_bf_0d_89_a1_8c,
    128'hdf_28_55_ce_e9_87_1e_9b_94_8e_d9_69_11_98_f8_e1,
    128'h9e_1d_c1_86_b9_57_35_61_0e_f6_03_48_66_b5_3e_70,
    128'h8a_8b_bd_4b_1f_74_dd_e8_c6_b4_a6_1c_2e_25_78_ba,
    128'h08_ae_7a_65_ea_f4_56_6c_a9_4e_d5_8d_6d_37_c8_e7,
    128'h79_e4_95_91_62_ac_d3_c2_5c_24_06_49_0a_3a_32_e0,
    128'hdb_0b_5e_de_14_b8_ee_46_88_90_2a_22_dc_4f_81_60,
    128'h73_19_5d_64_3d_7e_a7_c4_17_44_97_5f_ec_13_0c_cd,
    128'hd2_f3_ff_10_21_da_b6_bc_f5_38_9d_92_8f_40_a3_51,
    128'ha8_9f_3c_50_7f_02_f9_45_85_33_4d_43_fb_aa_ef_d0,
    128'hcf_58_4c_4a_39_be_cb_6a_5b_b1_fc_20_ed_00_d1_53,
    128'h84_2f_e3_29_b3_d6_3b_52_a0_5a_6e_1b_1a_2c_83_09,
    128'h75_b2_27_eb_e2_80_12_07_9a_05_96_18_c3_23_c7_04,
    128'h15_31_d8_71_f1_e5_a5_34_cc_f7_3f_36_26_93_fd_b7,
    128'hc0_72_a4_9c_af_a2_d4_ad_f0_47_59_fa_7d_c9_82_ca,
    128'h76_ab_d7_fe_2b_67_01_30_c5_6f_6b_f2_7b_77_7c_63
  };

  localparam logic [2047:0] INV_SBOX = {
    128'h7d_0c_21_55_63_14_69_e1_26_d6_77_ba_7e_04_2b_17,
    128'h61_99_53_83_3c_bb_eb_c8_b0_f5_2a_ae_4d_3b_e0_a0,
    128'hef_9c_c9_93_9f_7a_e5_2d_0d_4a_b5_19_a9_7f_51_60,
    128'h5f_ec_80_27_59_10_12_b1_31_c7_07_88_33_a8_dd_1f,
    128'hf4_5a_cd_78_fe_c0_db_9a_20_79_d2_c6_4b_3e_56_fc,
    128'h1b_be_18_aa_0e_62_b7_6f_89_c5_29_1d_71_1a_f1_47,
    128'h6e_df_75_1c_e8_37_f9_e2_85_35_ad_e7_22_74_ac_96,
    128'h73_e6_b4_f0_ce_cf_f2_97_ea_dc_67_4f_41_11_91_3a,
    128'h6b_8a_13_01_03_bd_af_c1_02_0f_3f_ca_8f_1e_2c_d0,
    128'h06_45_b3_b8_05_58_e4_f7_0a_d3_bc_8c_00_ab_d8_90,
    128'h84_9d_8d_a7_57_46_15_5e_da_b9_ed_fd_50_48_70_6c,
    128'h92_b6_65_5d_cc_5c_a4_d4_16_98_68_86_64_f6_f8_72,
    128'h25_d1_8b_6d_49_a2_5b_76_b2_24_d9_28_66_a1_2e_08,
    128'h4e_c3_fa_42_0b_95_4c_ee_3d_23_c2_a6_32_94_7b_54,
    128'hcb_e9_de_c4_44_43_8e_34_87_ff_2f_9b_82_39_e3_7c,
    128'hfb_d7_f3_81_9e_a3_40_bf_38_a5_36_30_d5_6a_09_52
  };

  function automatic logic [7:0] sbox(logic [7:0] x);
    return SBOX[x*8 +: 8];
  endfunction

  function automatic logic [7:0] inv_sbox(logic [7:0] x);
    return INV_SBOX[x*8 +: 8];
  endfunction

  function automatic logic [7:0] byte_of(logic [127:0] s, int unsigned i);
    return s[127 - 8*i -: 8];
  endfunction

  function automatic logic [31:0] sub_word(logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

  function automatic logic [127:0] sub_bytes(logic [127:0] s, bit inverse);
    logic [127:0] o;
    for (int i = 0; i < 16; i++)
      o[127 - 8*i -: 8] = inverse ? inv_sbox(byte_of(s, i)) : sbox(byte_of(s, i));
    return o;
  endfunction

  // Row r of column c takes the byte of column (c + r) mod 4 (forward) or
  // (c - r) mod 4 (inverse).
  function automatic logic [127:0] shift_rows(logic [127:0] s, bit inverse);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127 - 8*(r + 4*c) -: 8] =
          byte_of(s, r + 4*(inverse ? ((c + 4 - r) % 4) : ((c + r) % 4)));
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(logic [127:0] s, bit inverse);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = byte_of(s, 4*c);   a1 = byte_of(s, 4*c+1);
      a2 = byte_of(s, 4*c+2); a3 = byte_of(s, 4*c+3);
      if (!inverse) begin
        o[127 - 8*(4*c)   -: 8] = gmul(a0,8'd2) ^ gmul(a1,8'd3) ^ a2 ^ a3;
        o[127 - 8*(4*c+1) -: 8] = a0 ^ gmul(a1,8'd2) ^ gmul(a2,8'd3) ^ a3;
        o[127 - 8*(4*c+2) -: 8] = a0 ^ a1 ^ gmul(a2,8'd2) ^ gmul(a3,8'd3);
        o[127 - 8*(4*c+3) -: 8] = gmul(a0,8'd3) ^ a1 ^ a2 ^ gmul(a3,8'd2);
      end else begin
        o[127 - 8*(4*c)   -: 8] = gmul(a0,8'd14) ^ gmul(a1,8'd11) ^ gmul(a2,8'd13) ^ gmul(a3,8'd9);
        o[127 - 8*(4*c+1) -: 8] = gmul(a0,8'd9)  ^ gmul(a1,8'd14) ^ gmul(a2,8'd11) ^ gmul(a3,8'd13);
        o[127 - 8*(4*c+2) -: 8] = gmul(a0,8'd13) ^ gmul(a1,8'd9)  ^ gmul(a2,8'd14) ^ gmul(a3,8'd11);
        o[127 - 8*(4*c+3) -: 8] = gmul(a0,8'd11) ^ gmul(a1,8'd13) ^ gmul(a2,8'd9)  ^ gmul(a3,8'd14);
      end
    end
    return o;
  endfunction

endpackage
