// tb_ref_pkg -- reference models for the SAES32/SSM4 testbenches.
//
// Everything here is written from the cipher definitions, independently of
// the gate-level circuits in rtl/: the S-boxes are computed as GF(2^8)
// inversions (by exponentiation, x^254) followed by the standard affine maps,
// AES MixColumns by GF multiplication, and SM4's L and L' as rotations of a
// big-endian word followed by a byte swap to the little-endian layout.
package tb_ref_pkg;

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b,
                                      input logic [8:0] poly);
    logic [8:0] aa;
    logic [7:0] r;
    r  = 8'h00;
    aa = {1'b0, a};
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r ^= aa[7:0];
      aa = aa << 1;
      if (aa[8]) aa ^= poly;
    end
    return r;
  endfunction

  // x^254 = x^-1 (0 -> 0)
  function automatic logic [7:0] ginv(input logic [7:0] a, input logic [8:0] poly);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < 254; i++) r = gmul(r, a, poly);
    return r;
  endfunction

  function automatic logic [7:0] aes_sbox(input logic [7:0] x);
    logic [7:0] b, s;
    b = ginv(x, 9'h11b);
    for (int i = 0; i < 8; i++)
      s[i] = b[i] ^ b[(i+4)%8] ^ b[(i+5)%8] ^ b[(i+6)%8] ^ b[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  function automatic logic [7:0] aes_inv_sbox(input logic [7:0] y);
    logic [7:0] b;
    for (int i = 0; i < 8; i++)
      b[i] = y[(i+2)%8] ^ y[(i+5)%8] ^ y[(i+7)%8];
    return ginv(b ^ 8'h05, 9'h11b);
  endfunction

  // SM4: S(x) = A*inv(A*x ^ 0xD3) ^ 0xD3 in GF(2^8)/(x^8+x^7+x^6+x^5+x^4+x^2+1);
  // row i of A gives output bit 7-i.
  function automatic logic [7:0] sm4_aff(input logic [7:0] x);
    logic [7:0] rows [8] = '{8'hd3, 8'he9, 8'hf4, 8'h7a, 8'h3d, 8'h9e, 8'h4f, 8'ha7};
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[7-i] = ^(rows[i] & x);
    return r ^ 8'hd3;
  endfunction

  function automatic logic [7:0] sm4_sbox(input logic [7:0] x);
    return sm4_aff(ginv(sm4_aff(x), 9'h1f5));
  endfunction

  function automatic logic [31:0] rol32(input logic [31:0] w, input int n);
    return (n % 32 == 0) ? w : ((w << (n % 32)) | (w >> (32 - n % 32)));
  endfunction

  function automatic logic [31:0] bswap(input logic [31:0] w);
    return {w[7:0], w[15:8], w[23:16], w[31:24]};
  endfunction

  // Reference of one SAES32/SSM4 instruction; en = {EN_SM4, EN_AESI, EN_AES}
  function automatic logic [31:0] saes32_ref(input logic [31:0] rs1, input logic [31:0] rs2,
                                             input logic [4:0] fn, input logic [2:0] en = 3'b111);
    logic [7:0]  x, s;
    logic [31:0] y, be;
    x = rs2[8*fn[1:0] +: 8];
    case (fn[4:3])
      2'b00:   s = en[0] ? aes_sbox(x) : 8'h00;
      2'b01:   s = en[1] ? aes_inv_sbox(x) : 8'h00;
      2'b10:   s = en[2] ? sm4_sbox(x) : 8'h00;
      default: s = 8'h00;
    endcase
    case (fn[4:2])
      3'b000: y = {gmul(s, 8'h03, 9'h11b), s, s, gmul(s, 8'h02, 9'h11b)};
      3'b010: y = {gmul(s, 8'h0b, 9'h11b), gmul(s, 8'h0d, 9'h11b),
                   gmul(s, 8'h09, 9'h11b), gmul(s, 8'h0e, 9'h11b)};
      3'b001, 3'b011: y = {24'h0, s};
      3'b100: begin
        be = {s, 24'h0};
        y  = bswap(be ^ rol32(be, 2) ^ rol32(be, 10) ^ rol32(be, 18) ^ rol32(be, 24));
      end
      3'b101: begin
        be = {s, 24'h0};
        y  = bswap(be ^ rol32(be, 13) ^ rol32(be, 23));
      end
      default: y = 32'h0;
    endcase
    return rs1 ^ rol32(y, 8 * fn[1:0]);
  endfunction

  // A few published table entries (FIPS-197 and GB/T 32907), for spot checks
  localparam logic [7:0] AES_ROW0 [16] = '{8'h63, 8'h7c, 8'h77, 8'h7b, 8'hf2, 8'h6b, 8'h6f, 8'hc5,
                                           8'h30, 8'h01, 8'h67, 8'h2b, 8'hfe, 8'hd7, 8'hab, 8'h76};
  localparam logic [7:0] AESI_ROW0 [16] = '{8'h52, 8'h09, 8'h6a, 8'hd5, 8'h30, 8'h36, 8'ha5, 8'h38,
                                            8'hbf, 8'h40, 8'ha3, 8'h9e, 8'h81, 8'hf3, 8'hd7, 8'hfb};
  localparam logic [7:0] SM4_ROW0 [16] = '{8'hd6, 8'h90, 8'he9, 8'hfe, 8'hcc, 8'he1, 8'h3d, 8'hb7,
                                           8'h16, 8'hb6, 8'h14, 8'hc2, 8'h28, 8'hfb, 8'h2c, 8'h05};
  localparam logic [7:0] SM4_ROWF [16] = '{8'h18, 8'hf0, 8'h7d, 8'hec, 8'h3a, 8'hdc, 8'h4d, 8'h20,
                                           8'h79, 8'hee, 8'h5f, 8'h3e, 8'hd7, 8'hcb, 8'h39, 8'h48};

endpackage
