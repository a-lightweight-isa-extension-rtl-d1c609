// sbox_aesi -- inverse AES S-box (InvSubBytes): top -> shared middle -> bottom.
//
// Same three-layer structure as sbox_aes, with the inverse S-box's own linear
// top and bottom layers around the shared middle layer, as in the paper.
// Purely combinational: y[7:0] in, s[7:0] = InvSubBytes(y) out.
module sbox_aesi (
  input  logic [7:0] y,
  output logic [7:0] s
);
  logic [20:0] t;
  logic [17:0] m;
  sbox_aesi_top u_top (.y(y), .t(t));
  sbox_mid      u_mid (.t(t), .m(m));
  sbox_aesi_bot u_bot (.m(m), .s(s));
endmodule
