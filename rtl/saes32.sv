// saes32 -- combinational logic of the SAES32 / SSM4 instructions.
//
// One instruction does a quarter of an AES round column or one S-box lookup
// of an SM4 step: rd = rs1 ^ rotl(expand(sbox(byte(rs2, fn[1:0]))), 8*fn[1:0]).
//   1. fn[1:0] selects byte 0..3 of rs2 (ShiftRows is done by the choice of
//      source register and byte);
//   2. fn[4:3] selects the S-box: 00 AES, 01 AES^-1, 10 SM4;
//   3. fn[4:2] selects the linear expansion (saes32_expand);
//   4. the 32-bit word is rotated left by 8*fn[1:0] bits;
//   5. it is XORed with rs1 (AddRoundKey / SM4 state word update).
// The port list is the paper's. The paper's reference implementation keeps a
// complete S-box (top, shared-style middle, bottom) per cipher and selects
// between their outputs instead of multiplexing the linear layers around one
// middle layer; this module does the same.
//
// EN_AES, EN_AESI and EN_SM4 leave out the forward AES, inverse AES and SM4
// S-boxes, giving the reduced configurations the paper synthesises ("AES
// encrypt only": EN_AESI = EN_SM4 = 0, and so on). A left-out S-box reads as
// 0, so its code points return rd = rs1 ^ expand(0) = rs1 (a choice of this
// design). All three default to 1, the full AES + SM4 configuration.
//
// Timing: purely combinational, meant for a single-cycle execute stage.
module saes32
  import saes32_pkg::*;
#(
  parameter bit EN_AES  = 1'b1,
  parameter bit EN_AESI = 1'b1,
  parameter bit EN_SM4  = 1'b1
) (
  output logic [31:0] rd,   // to output register
  input  logic [31:0] rs1,  // input register 1
  input  logic [31:0] rs2,  // input register 2
  input  logic [4:0]  fn    // 5-bit func specifier
);
  logic [7:0]   x;
  logic [7:0]   s_aes, s_aesi, s_sm4, s;
  logic [31:0]  y;
  saes32_sbox_e sel;
  saes32_op_e   op;

  assign sel = saes32_sbox_e'(fn[4:3]);
  assign op  = saes32_op_e'(fn[4:2]);

  // 1. byte select
  always_comb begin
    unique case (fn[1:0])
      2'd0:    x = rs2[7:0];
      2'd1:    x = rs2[15:8];
      2'd2:    x = rs2[23:16];
      default: x = rs2[31:24];
    endcase
  end

  // 2. S-boxes
  if (EN_AES) begin : g_aes
    sbox_aes u_sbox (.x(x), .s(s_aes));
  end else begin : g_no_aes
    assign s_aes = 8'h00;
  end

  if (EN_AESI) begin : g_aesi
    sbox_aesi u_sbox (.y(x), .s(s_aesi));
  end else begin : g_no_aesi
    assign s_aesi = 8'h00;
  end

  if (EN_SM4) begin : g_sm4
    sbox_sm4 u_sbox (.x(x), .s(s_sm4));
  end else begin : g_no_sm4
    assign s_sm4 = 8'h00;
  end

  always_comb begin
    unique case (sel)
      SBOX_AES:  s = s_aes;
      SBOX_AESI: s = s_aesi;
      SBOX_SM4:  s = s_sm4;
      default:   s = 8'h00;
    endcase
  end

  // 3. linear expansion
  saes32_expand u_expand (.op(op), .s(s), .y(y));

  // 4./5. rotate and XOR
  assign rd = rs1 ^ rotl8(y, fn[1:0]);
endmodule
