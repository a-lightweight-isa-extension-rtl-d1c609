// sbox_sm4 -- SM4 S-box (tau): top -> shared middle -> bottom.
//
// The SM4 S-box is also an affine-wrapped GF(2^8) inversion, so the paper
// gives it new linear outer layers around the same middle layer as AES.
// Purely combinational: x[7:0] in, s[7:0] = Sbox_SM4(x) out.
module sbox_sm4 (
  input  logic [7:0] x,
  output logic [7:0] s
);
  logic [20:0] t;
  logic [17:0] m;
  sbox_sm4_top u_top (.x(x), .t(t));
  sbox_mid     u_mid (.t(t), .m(m));
  sbox_sm4_bot u_bot (.m(m), .s(s));
endmodule
