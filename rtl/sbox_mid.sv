// sbox_mid -- shared non-linear middle layer of the AES, AES^-1 and SM4 S-boxes.
//
// All three S-boxes are a GF(2^8) inversion wrapped in affine maps, and the
// inversion is the same circuit in every case: it is computed here in the
// tower-field basis of the Boyar-Peralta low-depth AES S-box, 21 bits in and
// 18 bits out, with 30 XOR and 34 AND gates (the paper's Table II figures).
// Each S-box then differs only in its linear top and bottom layers. The gate
// list is the published Boyar-Peralta middle section (M1..M63) with T25 formed
// here from two of the inputs.
//
// Interface: t[20:0] from a top layer in the order {U7, T27, T26, T24, T23,
// T22, T20, T19, T17, T16, T15, T14, T13, T10, T9, T8, T6, T4, T3, T2, T1};
// m[17:0] = {M63, ..., M46} to a bottom layer (M46 is m[0]).
// Purely combinational.
module sbox_mid (
  input  logic [20:0] t,
  output logic [17:0] m
);
  logic t1, t2, t3, t4, t6, t8, t9, t10, t13, t14, t15, t16, t17, t19, t20;
  logic t22, t23, t24, t25, t26, t27, d;
  logic m1, m2, m3, m4, m5, m6, m7, m8, m9, m10, m11, m12, m13, m14, m15;
  logic m16, m17, m18, m19, m20, m21, m22, m23, m24, m25, m26, m27, m28, m29;
  logic m30, m31, m32, m33, m34, m35, m36, m37, m38, m39, m40, m41, m42, m43;
  logic m44, m45;

  assign {d, t27, t26, t24, t23, t22, t20, t19, t17, t16,
          t15, t14, t13, t10, t9, t8, t6, t4, t3, t2, t1} = t;

  assign t25 = t20 ^ t17;

  assign m1  = t13 & t6;
  assign m2  = t23 & t8;
  assign m3  = t14 ^ m1;
  assign m4  = t19 & d;
  assign m5  = m4 ^ m1;
  assign m6  = t3 & t16;
  assign m7  = t22 & t9;
  assign m8  = t26 ^ m6;
  assign m9  = t20 & t17;
  assign m10 = m9 ^ m6;
  assign m11 = t1 & t15;
  assign m12 = t4 & t27;
  assign m13 = m12 ^ m11;
  assign m14 = t2 & t10;
  assign m15 = m14 ^ m11;
  assign m16 = m3 ^ m2;
  assign m17 = m5 ^ t24;
  assign m18 = m8 ^ m7;
  assign m19 = m10 ^ m15;
  assign m20 = m16 ^ m13;
  assign m21 = m17 ^ m15;
  assign m22 = m18 ^ m13;
  assign m23 = m19 ^ t25;
  assign m24 = m22 ^ m23;
  assign m25 = m22 & m20;
  assign m26 = m21 ^ m25;
  assign m27 = m20 ^ m21;
  assign m28 = m23 ^ m25;
  assign m29 = m28 & m27;
  assign m30 = m26 & m24;
  assign m31 = m20 & m23;
  assign m32 = m27 & m31;
  assign m33 = m27 ^ m25;
  assign m34 = m21 & m22;
  assign m35 = m24 & m34;
  assign m36 = m24 ^ m25;
  assign m37 = m21 ^ m29;
  assign m38 = m32 ^ m33;
  assign m39 = m23 ^ m30;
  assign m40 = m35 ^ m36;
  assign m41 = m38 ^ m40;
  assign m42 = m37 ^ m39;
  assign m43 = m37 ^ m38;
  assign m44 = m39 ^ m40;
  assign m45 = m42 ^ m41;

  // 18 output products M46..M63
  assign m[0]  = m44 & t6;   // M46
  assign m[1]  = m40 & t8;   // M47
  assign m[2]  = m39 & d;    // M48
  assign m[3]  = m43 & t16;  // M49
  assign m[4]  = m38 & t9;   // M50
  assign m[5]  = m37 & t17;  // M51
  assign m[6]  = m42 & t15;  // M52
  assign m[7]  = m45 & t27;  // M53
  assign m[8]  = m41 & t10;  // M54
  assign m[9]  = m44 & t13;  // M55
  assign m[10] = m40 & t23;  // M56
  assign m[11] = m39 & t19;  // M57
  assign m[12] = m43 & t3;   // M58
  assign m[13] = m38 & t22;  // M59
  assign m[14] = m37 & t20;  // M60
  assign m[15] = m42 & t1;   // M61
  assign m[16] = m45 & t4;   // M62
  assign m[17] = m41 & t2;   // M63
endmodule
