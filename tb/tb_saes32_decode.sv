// tb_saes32_decode -- test of the custom-0 R-type decoder.
//
// Builds instruction words field by field for every fn value and random
// register indices, checks the extracted fields and the match / valid /
// illegal flags, then checks that words with another opcode, funct3 or
// funct7[6:5] are not matched. A second instance decodes for the reduced
// "AES encrypt only" configuration.
module tb_saes32_decode;
  import saes32_pkg::*;

  logic          clk = 1'b0;
  logic [31:0]   instr;
  logic          match, valid, illegal, match_e, valid_e, illegal_e;
  saes32_instr_t f, f_e;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  saes32_decode dut (.instr(instr), .match(match), .valid(valid), .illegal(illegal), .fields(f));
  saes32_decode #(.EN_AES(1'b1), .EN_AESI(1'b0), .EN_SM4(1'b0))
    dut_enc (.instr(instr), .match(match_e), .valid(valid_e), .illegal(illegal_e), .fields(f_e));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s instr=%08x", what, instr);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [4:0] fn, r1, r2, rd;
    for (int k = 0; k < 2000; k++) begin
      fn = 5'(k % 32);
      r1 = 5'($urandom); r2 = 5'($urandom); rd = 5'($urandom);
      @(negedge clk);
      instr = {2'b00, fn, r2, r1, 3'b000, rd, 7'b0001011};
      @(posedge clk);
      check(match, "match");
      check(valid == (fn[4:3] != 2'b11), "valid");
      check(illegal == (fn[4:3] == 2'b11), "illegal");
      check(f.fn == fn && f.rs1 == r1 && f.rs2 == r2 && f.rd == rd, "fields");
      check(valid_e == (fn[4:2] == 3'b000 || fn[4:2] == 3'b001), "valid enc-only");
      check(illegal_e == !valid_e, "illegal enc-only");
    end
    // near misses: wrong opcode, funct3, or funct7[6:5]
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      instr = $urandom;
      case (k % 3)
        0: begin instr[14:12] = 3'b000; instr[31:30] = 2'b00;
                 if (instr[6:0] == 7'b0001011) instr[6:0] = 7'b0110011; end
        1: begin instr[6:0] = 7'b0001011; instr[31:30] = 2'b00;
                 if (instr[14:12] == 3'b000) instr[14:12] = 3'b001; end
        default: begin instr[6:0] = 7'b0001011; instr[14:12] = 3'b000;
                 if (instr[31:30] == 2'b00) instr[31:30] = 2'b01; end
      endcase
      @(posedge clk);
      check(!match && !valid && !illegal && !valid_e && !illegal_e, "no match");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
