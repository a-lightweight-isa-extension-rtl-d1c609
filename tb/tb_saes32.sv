// tb_saes32 -- test of the SAES32/SSM4 instruction logic.
//
// Four instances, one per synthesis configuration: AES + SM4 (the default),
// AES encrypt only, SM4 only, and AES full (encrypt and decrypt). For all 32 values of fn and random rs1/rs2 (plus
// every byte value in every byte lane), rd is compared with the reference
// model of tb_ref_pkg, which follows the cipher definitions. The unit is
// combinational, so the result is checked in the cycle the operands are
// applied (the single-cycle latency the design is meant for).
module tb_saes32;
  import tb_ref_pkg::*;

  logic        clk = 1'b0;
  logic [31:0] rs1, rs2, rd_full, rd_enc, rd_sm4, rd_aes;
  logic [4:0]  fn;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  saes32 dut_full (.rd(rd_full), .rs1(rs1), .rs2(rs2), .fn(fn));
  saes32 #(.EN_AES(1'b1), .EN_AESI(1'b0), .EN_SM4(1'b0))
    dut_enc (.rd(rd_enc), .rs1(rs1), .rs2(rs2), .fn(fn));
  saes32 #(.EN_AES(1'b0), .EN_AESI(1'b0), .EN_SM4(1'b1))
    dut_sm4 (.rd(rd_sm4), .rs1(rs1), .rs2(rs2), .fn(fn));
  saes32 #(.EN_AES(1'b1), .EN_AESI(1'b1), .EN_SM4(1'b0))
    dut_aes (.rd(rd_aes), .rs1(rs1), .rs2(rs2), .fn(fn));

  task automatic apply(input logic [31:0] a, input logic [31:0] b, input logic [4:0] f);
    logic [31:0] e_full, e_enc, e_sm4, e_aes;
    @(negedge clk);
    rs1 = a; rs2 = b; fn = f;
    e_full = saes32_ref(a, b, f, 3'b111);
    e_enc  = saes32_ref(a, b, f, 3'b001);
    e_sm4  = saes32_ref(a, b, f, 3'b100);
    e_aes  = saes32_ref(a, b, f, 3'b011);
    @(posedge clk);
    checks += 4;
    if (rd_sm4 !== e_sm4) begin
      failures++;
      if (failures < 10) $display("sm4-only fn=%02x got=%08x exp=%08x", f, rd_sm4, e_sm4);
    end
    if (rd_aes !== e_aes) begin
      failures++;
      if (failures < 10) $display("aes-full fn=%02x got=%08x exp=%08x", f, rd_aes, e_aes);
    end
    if (rd_full !== e_full) begin
      failures++;
      if (failures < 10) $display("full fn=%02x rs1=%08x rs2=%08x got=%08x exp=%08x", f, a, b, rd_full, e_full);
    end
    if (rd_enc !== e_enc) begin
      failures++;
      if (failures < 10) $display("enc-only fn=%02x rs1=%08x rs2=%08x got=%08x exp=%08x", f, a, b, rd_enc, e_enc);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // every byte value in every lane, for every fn (rs1 = 0 shows the raw word)
    for (int f = 0; f < 32; f++)
      for (int v = 0; v < 256; v += 5)
        apply(32'h0, {4{8'(v)}}, 5'(f));
    // random operands
    for (int k = 0; k < 3000; k++)
      apply($urandom, $urandom, 5'($urandom));
    // FIPS-197 spot check: S(0x53) = 0xed, placed in byte 0 by saes32.encs
    apply(32'h0, 32'h0000_0053, 5'b00100);
    checks++;
    if (rd_full !== 32'h0000_00ed) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
