// sbox_sm4_top -- linear input ("top") layer of the SM4 S-box.
//
// The SM4 S-box is S(x) = A1*inv'(A1*x ^ 0xD3) ^ 0xD3, where inv'() is
// inversion in GF(2^8) modulo x^8+x^7+x^6+x^5+x^4+x^2+1 and A1 the SM4 affine
// matrix. Inversion in that field equals inversion in the AES field after the
// field isomorphism phi (inv'(z) = phi^-1(inv(phi(z)))), so the shared middle
// layer (sbox_mid) can compute it. This layer produces the 21 Boyar-Peralta
// top forms of u = phi(A1*x ^ 0xD3): output bit k is the parity of
// (x & ROW[k]) flipped by CONST[k]. phi maps the polynomial-basis element
// x^i of the SM4 field to 0x23^i in the AES field (0x23 is the smallest root
// of the SM4 polynomial there); any root gives a valid pair with sbox_sm4_bot.
// The paper gives this layer as a 27-gate XOR/XNOR netlist; this design
// writes the same function as a constant GF(2) matrix.
//
// Interface: x[7:0] input byte, t[20:0] to sbox_mid in sbox_aes_top's order.
// Purely combinational.
module sbox_sm4_top (
  input  logic [7:0]  x,
  output logic [20:0] t
);
  // ROW[k]: which input bits feed middle-layer input k (k = 0 first)
  localparam logic [7:0] ROW [21] = '{
    8'h47, 8'h20, 8'h75, 8'h67, 8'hd6, 8'h9a, 8'h3e,
    8'ha4, 8'h12, 8'hfb, 8'hbc, 8'hce, 8'hf0, 8'h24,
    8'h63, 8'h16, 8'h36, 8'h84, 8'hbb, 8'h18, 8'h4c
  };
  // CONST[k]: XNOR (inverted) output k
  localparam logic [20:0] CONST = 21'b011110101010101110111;

  always_comb begin
    for (int k = 0; k < 21; k++) t[k] = (^(x & ROW[k])) ^ CONST[k];
  end
endmodule
