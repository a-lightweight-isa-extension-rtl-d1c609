// saes32_expand -- the 8 -> 32-bit linear expansion step of SAES32/SSM4.
//
// After the S-box, fn[4:2] chooses how the substituted byte s is spread over
// a 32-bit word. The word is laid out little-endian (byte 0 = AES row 0), and
// for SM4 the byte order of the standard's big-endian words is flipped, so
// that no byte swapping is needed on a little-endian core (both as the paper
// describes):
//   encsm : one MixColumns column,          {3s, s, s, 2s}
//   decsm : one InvMixColumns column,       {11s, 13s, 9s, 14s}
//   encs / decs : the byte alone,           {0, 0, 0, s}
//   ssm4.ed : SM4 L(B) = B^(B<<<2)^(B<<<10)^(B<<<18)^(B<<<24) of the byte
//             in its big-endian top position, then byte-swapped
//   ssm4.ks : SM4 L'(B) = B^(B<<<13)^(B<<<23), likewise
// The unused code points give 0 (a choice of this design).
// Products are in GF(2^8) modulo x^8+x^4+x^3+x+1. Purely combinational.
module saes32_expand
  import saes32_pkg::*;
(
  input  saes32_op_e  op,
  input  logic [7:0]  s,
  output logic [31:0] y
);
  logic [7:0] s2, s4, s8;

  assign s2 = gf_xtime(s);
  assign s4 = gf_xtime(s2);
  assign s8 = gf_xtime(s4);

  always_comb begin
    unique case (op)
      OP_AES_ENCSM: y = {s2 ^ s, s, s, s2};
      OP_AES_DECSM: y = {s8 ^ s2 ^ s, s8 ^ s4 ^ s, s8 ^ s, s8 ^ s4 ^ s2};
      OP_AES_ENCS,
      OP_AES_DECS:  y = {24'h0, s};
      OP_SM4_ED:    y = {24'h0, s} ^ {16'h0, s, 8'h0} ^ {22'h0, s, 2'b0} ^
                        {6'h0, s, 18'h0} ^ {s[5:0], 26'h0} ^ {14'h0, s[7:6], 16'h0};
      OP_SM4_KS:    y = {24'h0, s} ^ {s[2:0], 29'h0} ^ {17'h0, s[7:1], 8'h0} ^
                        {8'h0, s[0], 23'h0} ^ {11'h0, s[7:3], 16'h0};
      default:      y = 32'h0;
    endcase
  end
endmodule
