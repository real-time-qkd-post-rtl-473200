// aes_pkg: AES-128 round functions and the S-box tables.
//
// The S-box and its inverse are the 256-entry tables of FIPS-197 (the
// multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1 followed by the
// affine map with constant 0x63), held as constants and read as lookup
// tables, in line with the table-driven (LUT) AES the paper uses. Byte 0 of a 128-bit
// state is bits [127:120]; bytes fill the 4x4 state column by column
// (FIPS-197 order).
package aes_pkg;

  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0;
    x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p = p ^ x;
      x = xtime(x);
    end
    return p;
  endfunction

  // FIPS-197 S-box and inverse S-box, entry 0 first (most significant byte).
  // Row k of the literal holds entries 16k .. 16k+15.
  localparam logic [2047:0] SBOX = {
    128'h63_7c_77_7b_f2_6b_6f_c5_30_01_67_2b_fe_d7_ab_76,
    128'hca_82_c9_7d_fa_59_47_f0_ad_d4_a2_af_9c_a4_72_c0,
    128'hb7_fd_93_26_36_3f_f7_cc_34_a5_e5_f1_71_d8_31_15,
    128'h04_c7_23_c3_18_96_05_9a_07_12_80_e2_eb_27_b2_75,
    128'h09_83_2c_1a_1b_6e_5a_a0_52_3b_d6_b3_29_e3_2f_84,
    128'h53_d1_00_ed_20_fc_b1_5b_6a_cb_be_39_4a_4c_58_cf,
    128'hd0_ef_aa_fb_43_4d_33_85_45_f9_02_7f_50_3c_9f_a8,
    128'h51_a3_40_8f_92_9d_38_f5_bc_b6_da_21_10_ff_f3_d2,
    128'hcd_0c_13_ec_5f_97_44_17_c4_a7_7e_3d_64_5d_19_73,
    128'h60_81_4f_dc_22_2a_90_88_46_ee_b8_14_de_5e_0b_db,
    128'he0_32_3a_0a_49_06_24_5c_c2_d3_ac_62_91_95_e4_79,
    128'he7_c8_37_6d_8d_d5_4e_a9_6c_56_f4_ea_65_7a_ae_08,
    128'hba_78_25_2e_1c_a6_b4_c6_e8_dd_74_1f_4b_bd_8b_8a,
    128'h70_3e_b5_66_48_03_f6_0e_61_35_57_b9_86_c1_1d_9e,
    128'he1_f8_98_11_69_d9_8e_94_9b_1e_87_e9_ce_55_28_df,
    128'h8c_a1_89_0d_bf_e6_42_68_41_99_2d_0f_b0_54_bb_16
  };

  localparam logic [2047:0] INV_SBOX = {
    128'h52_09_6a_d5_30_36_a5_38_bf_40_a3_9e_81_f3_d7_fb,
    128'h7c_e3_39_82_9b_2f_ff_87_34_8e_43_44_c4_de_e9_cb,
    128'h54_7b_94_32_a6_c2_23_3d_ee_4c_95_0b_42_fa_c3_4e,
    128'h08_2e_a1_66_28_d9_24_b2_76_5b_a2_49_6d_8b_d1_25,
    128'h72_f8_f6_64_86_68_98_16_d4_a4_5c_cc_5d_65_b6_92,
    128'h6c_70_48_50_fd_ed_b9_da_5e_15_46_57_a7_8d_9d_84,
    128'h90_d8_ab_00_8c_bc_d3_0a_f7_e4_58_05_b8_b3_45_06,
    128'hd0_2c_1e_8f_ca_3f_0f_02_c1_af_bd_03_01_13_8a_6b,
    128'h3a_91_11_41_4f_67_dc_ea_97_f2_cf_ce_f0_b4_e6_73,
    128'h96_ac_74_22_e7_ad_35_85_e2_f9_37_e8_1c_75_df_6e,
    128'h47_f1_1a_71_1d_29_c5_89_6f_b7_62_0e_aa_18_be_1b,
    128'hfc_56_3e_4b_c6_d2_79_20_9a_db_c0_fe_78_cd_5a_f4,
    128'h1f_dd_a8_33_88_07_c7_31_b1_12_10_59_27_80_ec_5f,
    128'h60_51_7f_a9_19_b5_4a_0d_2d_e5_7a_9f_93_c9_9c_ef,
    128'ha0_e0_3b_4d_ae_2a_f5_b0_c8_eb_bb_3c_83_53_99_61,
    128'h17_2b_04_7e_ba_77_d6_26_e1_69_14_63_55_21_0c_7d
  };

  function automatic logic [7:0] sbox(input logic [7:0] b);
    return SBOX[2047 - 8*b -: 8];
  endfunction

  function automatic logic [7:0] inv_sbox(input logic [7:0] b);
    return INV_SBOX[2047 - 8*b -: 8];
  endfunction

  // Byte i of a state (i = 0 is the most significant byte).
  function automatic logic [7:0] sbyte(input logic [127:0] s, input int i);
    return s[127-8*i -: 8];
  endfunction

  function automatic logic [127:0] sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[127-8*i -: 8] = sbox(sbyte(s, i));
    return o;
  endfunction

  function automatic logic [127:0] inv_sub_bytes(input logic [127:0] s);
    logic [127:0] o;
    for (int i = 0; i < 16; i++) o[127-8*i -: 8] = inv_sbox(sbyte(s, i));
    return o;
  endfunction

  // Row r of column c is byte r + 4c; row r rotates left by r columns.
  function automatic logic [127:0] shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(r+4*c) -: 8] = sbyte(s, r + 4*((c+r)%4));
    return o;
  endfunction

  function automatic logic [127:0] inv_shift_rows(input logic [127:0] s);
    logic [127:0] o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(r+4*((c+r)%4)) -: 8] = sbyte(s, r + 4*c);
    return o;
  endfunction

  function automatic logic [127:0] mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = sbyte(s, 4*c); a1 = sbyte(s, 4*c+1); a2 = sbyte(s, 4*c+2); a3 = sbyte(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = gmul(a0,8'h02) ^ gmul(a1,8'h03) ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ gmul(a1,8'h02) ^ gmul(a2,8'h03) ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ gmul(a2,8'h02) ^ gmul(a3,8'h03);
      o[127-8*(4*c+3) -: 8] = gmul(a0,8'h03) ^ a1 ^ a2 ^ gmul(a3,8'h02);
    end
    return o;
  endfunction

  function automatic logic [127:0] inv_mix_columns(input logic [127:0] s);
    logic [127:0] o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = sbyte(s, 4*c); a1 = sbyte(s, 4*c+1); a2 = sbyte(s, 4*c+2); a3 = sbyte(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = gmul(a0,8'h0e) ^ gmul(a1,8'h0b) ^ gmul(a2,8'h0d) ^ gmul(a3,8'h09);
      o[127-8*(4*c+1) -: 8] = gmul(a0,8'h09) ^ gmul(a1,8'h0e) ^ gmul(a2,8'h0b) ^ gmul(a3,8'h0d);
      o[127-8*(4*c+2) -: 8] = gmul(a0,8'h0d) ^ gmul(a1,8'h09) ^ gmul(a2,8'h0e) ^ gmul(a3,8'h0b);
      o[127-8*(4*c+3) -: 8] = gmul(a0,8'h0b) ^ gmul(a1,8'h0d) ^ gmul(a2,8'h09) ^ gmul(a3,8'h0e);
    end
    return o;
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

endpackage
