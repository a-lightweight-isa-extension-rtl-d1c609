// sbox_aes -- AES S-box (SubBytes) as top layer -> shared middle -> bottom.
//
// Structure from the paper: an 8->21 linear top layer, the 21->18 non-linear
// middle layer shared by all S-boxes of the design, and an 18->8 linear
// bottom layer, about 128 gates with a short logic depth. Purely
// combinational: x[7:0] in, s[7:0] = SubBytes(x) out.
module sbox_aes (
  input  logic [7:0] x,
  output logic [7:0] s
);
  logic [20:0] t;
  logic [17:0] m;
  sbox_aes_top u_top (.x(x), .t(t));
  sbox_mid     u_mid (.t(t), .m(m));
  sbox_aes_bot u_bot (.m(m), .s(s));
endmodule
