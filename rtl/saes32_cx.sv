// saes32_cx -- SAES32/SSM4 execution unit for a single-cycle RV32 execute stage.
//
// The top of the design: the custom-0 decoder (saes32_decode) and the
// instruction logic (saes32) joined the way a core's execute stage uses them.
// The core sends the instruction word; the unit returns the register indices
// to read, takes the two operand values back, and returns the result with a
// write enable and the destination index, all in the same cycle. The unit
// touches only the core's main register file, as the paper requires. The host
// core itself (register file, fetch, trap handling) is not part of this
// design; its connections are the ports below.
//
// Interface:
//   instr        instruction word in execute
//   rs1_idx/rs2_idx  register indices to read (valid whenever instr is)
//   rs1_val/rs2_val  values of those registers
//   rd_we        instr is a supported SAES32/SSM4 instruction: write rd_val
//   rd_idx       destination register
//   rd_val       result
//   illegal      instr has the SAES32 shape but an unused or left-out fn
// Timing: purely combinational, result in the cycle of issue.
module saes32_cx
  import saes32_pkg::*;
#(
  parameter bit EN_AES  = 1'b1,
  parameter bit EN_AESI = 1'b1,
  parameter bit EN_SM4  = 1'b1
) (
  input  logic [31:0] instr,
  output logic [4:0]  rs1_idx,
  output logic [4:0]  rs2_idx,
  input  logic [31:0] rs1_val,
  input  logic [31:0] rs2_val,
  output logic        rd_we,
  output logic [4:0]  rd_idx,
  output logic [31:0] rd_val,
  output logic        illegal
);
  saes32_instr_t f;
  logic          match, valid;

  saes32_decode #(.EN_AES(EN_AES), .EN_AESI(EN_AESI), .EN_SM4(EN_SM4)) u_dec (
    .instr(instr), .match(match), .valid(valid), .illegal(illegal), .fields(f)
  );

  saes32 #(.EN_AES(EN_AES), .EN_AESI(EN_AESI), .EN_SM4(EN_SM4)) u_saes32 (
    .rd(rd_val), .rs1(rs1_val), .rs2(rs2_val), .fn(f.fn)
  );

  assign rs1_idx = f.rs1;
  assign rs2_idx = f.rs2;
  assign rd_idx  = f.rd;
  assign rd_we   = valid;

  always_comb begin
    assert (!(rd_we && illegal)) else $error("saes32_cx: write enable on an illegal instruction");
    assert (!(match && !(rd_we || illegal))) else $error("saes32_cx: decoded SAES32 word neither executed nor trapped");
  end
endmodule
