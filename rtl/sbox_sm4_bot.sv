// sbox_sm4_bot -- linear output ("bottom") layer of the SM4 S-box.
//
// Folds the 18 product bits of the shared middle layer (sbox_mid) into
// A1*phi^-1(inv) ^ 0xD3, where inv is the AES-field inverse the middle layer
// computes and phi the field isomorphism used by sbox_sm4_top. Output bit j is
// the parity of (m & ROW[j]) flipped by bit j of CONST.
// The paper gives an optimised 38-gate XOR/XNOR netlist; this design writes
// the same function as a constant GF(2) matrix.
//
// Interface: m[17:0] from sbox_mid, s[7:0] output byte. Purely combinational.
module sbox_sm4_bot (
  input  logic [17:0] m,
  output logic [7:0]  s
);
  // ROW[j]: which middle-layer products feed output bit j (j = 0 first)
  localparam logic [17:0] ROW [8] = '{18'h000f5, 18'h1ea1b, 18'h1dd68, 18'h05ac3, 18'h33a36, 18'h06d9d, 18'h2e600, 18'h1879d};
  localparam logic [7:0]  CONST = 8'hd3;

  always_comb begin
    for (int j = 0; j < 8; j++) s[j] = (^(m & ROW[j])) ^ CONST[j];
  end
endmodule
