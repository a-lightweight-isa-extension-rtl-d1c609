// saes32_pkg -- shared types and constants of the SAES32/SSM4 instruction logic.
//
// The 5-bit function field fn[4:0] of the instruction is split in two parts:
// fn[1:0] selects one byte of rs2 and the rotation of the result, and fn[4:2]
// selects the S-box (fn[4:3]) together with the linear expansion (fn[2]).
// The six used fn[4:2] code points and the custom-0 R-type encoding used for
// prototyping follow the paper; the two unused code points 3'b11x are reported
// as illegal by the decoder, which is a choice of this design.
package saes32_pkg;

  // fn[4:2]: the operation (assembler identifier in the comment)
  typedef enum logic [2:0] {
    OP_AES_ENCSM = 3'b000,  // saes32.encsm : AES encrypt round (SubBytes + MixColumns part)
    OP_AES_ENCS  = 3'b001,  // saes32.encs  : AES final round / key schedule (SubBytes only)
    OP_AES_DECSM = 3'b010,  // saes32.decsm : AES decrypt round (InvSubBytes + InvMixColumns part)
    OP_AES_DECS  = 3'b011,  // saes32.decs  : AES decrypt final round (InvSubBytes only)
    OP_SM4_ED    = 3'b100,  // ssm4.ed      : SM4 encrypt/decrypt step, linear map L
    OP_SM4_KS    = 3'b101,  // ssm4.ks      : SM4 key schedule step, linear map L'
    OP_UNUSED_6  = 3'b110,
    OP_UNUSED_7  = 3'b111
  } saes32_op_e;

  // fn[4:3]: the S-box
  typedef enum logic [1:0] {
    SBOX_AES  = 2'b00,
    SBOX_AESI = 2'b01,
    SBOX_SM4  = 2'b10,
    SBOX_NONE = 2'b11
  } saes32_sbox_e;

  // Prototype encoding: custom-0 major opcode, R-type, funct3 = 000,
  // funct7 = {2'b00, fn[4:0]}.
  localparam logic [6:0] OPCODE_CUSTOM0 = 7'b0001011;
  localparam logic [2:0] SAES32_FUNCT3  = 3'b000;

  // Fields of a decoded SAES32 instruction.
  typedef struct packed {
    logic [4:0] fn;
    logic [4:0] rs2;
    logic [4:0] rs1;
    logic [4:0] rd;
  } saes32_instr_t;

  // Multiplication by x in GF(2^8) modulo the AES polynomial x^8+x^4+x^3+x+1.
  function automatic logic [7:0] gf_xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  // 32-bit rotation left by a multiple of 8 bits.
  function automatic logic [31:0] rotl8(input logic [31:0] w, input logic [1:0] n);
    unique case (n)
      2'd0:    return w;
      2'd1:    return {w[23:0], w[31:24]};
      2'd2:    return {w[15:0], w[31:16]};
      default: return {w[7:0],  w[31:8]};
    endcase
  endfunction

endpackage
