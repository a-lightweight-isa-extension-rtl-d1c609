// saes32_decode -- instruction decoder for the prototype SAES32 encoding.
//
// The instructions are placed in the RISC-V custom-0 major opcode as R-type
// instructions with fn[4:0] in the low five bits of funct7 (as in the paper):
//   [31:30] 00 | [29:25] fn | [24:20] rs2 | [19:15] rs1 | [14:12] 000 |
//   [11:7] rd | [6:0] 0001011
// `match` flags any word of that shape; `valid` flags those whose fn[4:2] is
// one of the six used code points and whose S-box is built (EN_* as in
// saes32); `illegal` flags a match that is not valid (the unused points
// 3'b11x, or a left-out cipher), for the host core to trap on. How a core
// handles such words is not given by the paper; reporting them is this
// design's choice. Purely combinational.
module saes32_decode
  import saes32_pkg::*;
#(
  parameter bit EN_AES  = 1'b1,
  parameter bit EN_AESI = 1'b1,
  parameter bit EN_SM4  = 1'b1
) (
  input  logic [31:0]   instr,
  output logic          match,
  output logic          valid,
  output logic          illegal,
  output saes32_instr_t fields
);
  saes32_op_e op;
  logic       supported;

  assign fields = '{fn: instr[29:25], rs2: instr[24:20], rs1: instr[19:15], rd: instr[11:7]};
  assign op     = saes32_op_e'(instr[29:27]);

  assign match = (instr[6:0] == OPCODE_CUSTOM0) && (instr[14:12] == SAES32_FUNCT3) &&
                 (instr[31:30] == 2'b00);

  always_comb begin
    unique case (op)
      OP_AES_ENCSM, OP_AES_ENCS: supported = EN_AES;
      OP_AES_DECSM, OP_AES_DECS: supported = EN_AESI;
      OP_SM4_ED, OP_SM4_KS:      supported = EN_SM4;
      default:                   supported = 1'b0;
    endcase
  end

  assign valid   = match && supported;
  assign illegal = match && !supported;
endmodule
