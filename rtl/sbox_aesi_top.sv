// sbox_aesi_top -- linear input ("top") layer of the inverse AES S-box.
//
// The inverse AES S-box is S^-1(y) = inv(A^-1(y ^ 0x63)), with A the AES
// affine matrix and inv() the GF(2^8) inversion. The inversion is computed by
// the shared middle layer (sbox_mid), so this layer must produce the same 21
// linear forms the AES top layer (sbox_aes_top) produces, but of the byte
// u = A^-1(y ^ 0x63) instead of y. That is an affine map of y: output bit k is
// the parity of (y & ROW[k]) flipped by CONST[k], where ROW[k]/CONST[k] are
// the composition of the Boyar-Peralta top form k with A^-1(. ^ 0x63).
// The paper builds its own optimised XOR/XNOR netlist for this layer (26
// gates); this design writes the same function as a constant GF(2) matrix and
// leaves gate-level optimisation to synthesis.
//
// Interface: y[7:0] input byte, t[20:0] to sbox_mid in sbox_aes_top's order.
// Purely combinational.
module sbox_aesi_top (
  input  logic [7:0]  y,
  output logic [20:0] t
);
  // ROW[k]: which input bits feed middle-layer input k (k = 0 first)
  localparam logic [7:0] ROW [21] = '{
    8'h18, 8'hc0, 8'h1b, 8'hd8, 8'h74, 8'hd0, 8'h19,
    8'hc9, 8'hc3, 8'hcf, 8'hd7, 8'h6a, 8'h73, 8'h53,
    8'h4b, 8'h50, 8'h90, 8'h09, 8'h71, 8'h1e, 8'ha4
  };
  // CONST[k]: XNOR (inverted) output k
  localparam logic [20:0] CONST = 21'b111101110111101101010;

  always_comb begin
    for (int k = 0; k < 21; k++) t[k] = (^(y & ROW[k])) ^ CONST[k];
  end
endmodule
