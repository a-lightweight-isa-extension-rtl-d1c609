// sbox_aes_top -- linear input ("top") layer of the AES S-box.
//
// The AES S-box is built as top layer -> shared non-linear middle layer
// (sbox_mid) -> bottom layer, the Boyar-Peralta low-depth construction that
// the paper uses for all three of its S-boxes. This layer maps the input byte
// to the 21 linear combinations the middle layer consumes, using 26 XOR gates,
// the count the paper gives for its AES top layer. The gate list is the
// published Boyar-Peralta one; T25 = T20 ^ T17 is formed inside the middle
// layer (giving the paper's 21 middle inputs), which is this design's reading
// of where that one XOR sits.
//
// Interface: x[7:0] input byte (x[7] is Boyar-Peralta's U0), t[20:0] to the
// middle layer in the order {U7, T27, T26, T24, T23, T22, T20, T19, T17, T16,
// T15, T14, T13, T10, T9, T8, T6, T4, T3, T2, T1} (T1 is t[0]).
// Purely combinational.
module sbox_aes_top (
  input  logic [7:0]  x,
  output logic [20:0] t
);
  logic u0, u1, u2, u3, u4, u5, u6, u7;
  logic t1, t2, t3, t4, t5, t6, t7, t8, t9, t10, t11, t12, t13, t14;
  logic t15, t16, t17, t18, t19, t20, t21, t22, t23, t24, t26, t27;

  assign {u0, u1, u2, u3, u4, u5, u6, u7} = x;

  assign t1  = u0 ^ u3;
  assign t2  = u0 ^ u5;
  assign t3  = u0 ^ u6;
  assign t4  = u3 ^ u5;
  assign t5  = u4 ^ u6;
  assign t6  = t1 ^ t5;
  assign t7  = u1 ^ u2;
  assign t8  = u7 ^ t6;
  assign t9  = u7 ^ t7;
  assign t10 = t6 ^ t7;
  assign t11 = u1 ^ u5;
  assign t12 = u2 ^ u5;
  assign t13 = t3 ^ t4;
  assign t14 = t6 ^ t11;
  assign t15 = t5 ^ t11;
  assign t16 = t5 ^ t12;
  assign t17 = t9 ^ t16;
  assign t18 = u3 ^ u7;
  assign t19 = t7 ^ t18;
  assign t20 = t1 ^ t19;
  assign t21 = u6 ^ u7;
  assign t22 = t7 ^ t21;
  assign t23 = t2 ^ t22;
  assign t24 = t2 ^ t10;
  assign t26 = t3 ^ t16;
  assign t27 = t1 ^ t12;

  assign t = {u7, t27, t26, t24, t23, t22, t20, t19, t17, t16,
              t15, t14, t13, t10, t9, t8, t6, t4, t3, t2, t1};
endmodule
