// sbox_aesi_bot -- linear output ("bottom") layer of the inverse AES S-box.
//
// The shared middle layer (sbox_mid) leaves the GF(2^8) inverse spread over
// 18 product bits; the AES bottom layer folds them into A(inv) ^ 0x63. For the
// inverse S-box the plain inverse is wanted, so output bit j here is the
// parity of (m & ROW[j]), ROW being A^-1 composed with the linear part of the
// AES bottom layer. No constant is needed.
// The paper gives an optimised 37-XOR netlist; this design writes the same
// function as a constant GF(2) matrix.
//
// Interface: m[17:0] from sbox_mid, s[7:0] output byte. Purely combinational.
module sbox_aesi_bot (
  input  logic [17:0] m,
  output logic [7:0]  s
);
  // ROW[j]: which middle-layer products feed output bit j (j = 0 first)
  localparam logic [17:0] ROW [8] = '{18'h28a00, 18'h1b0d8, 18'h1b173, 18'h2bcf5, 18'h1b145, 18'h1dd5e, 18'h2e75e, 18'h1b168};
  localparam logic [7:0]  CONST = 8'h00;

  always_comb begin
    for (int j = 0; j < 8; j++) s[j] = (^(m & ROW[j])) ^ CONST[j];
  end
endmodule
