// tb_saes32_expand -- exhaustive test of the linear expansion step.
//
// For every S-box output byte and all eight fn[4:2] code points, compares the
// 32-bit expansion with a reference built from GF(2^8) multiplications (AES
// MixColumns / InvMixColumns columns) and from SM4's L and L' applied to a
// big-endian word and byte-swapped (tb_ref_pkg::saes32_ref with rs1 = 0,
// byte 0 and the S-box bypassed by inverting it on the way in).
module tb_saes32_expand;
  import tb_ref_pkg::*;
  import saes32_pkg::*;

  logic        clk = 1'b0;
  saes32_op_e  op;
  logic [7:0]  s;
  logic [31:0] y, exp_y, be;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  saes32_expand dut (.op(op), .s(s), .y(y));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 8; o++) begin
      for (int i = 0; i < 256; i++) begin
        @(negedge clk);
        op = saes32_op_e'(o);
        s  = 8'(i);
        be = {s, 24'h0};
        case (o)
          0: exp_y = {gmul(s, 8'h03, 9'h11b), s, s, gmul(s, 8'h02, 9'h11b)};
          2: exp_y = {gmul(s, 8'h0b, 9'h11b), gmul(s, 8'h0d, 9'h11b),
                      gmul(s, 8'h09, 9'h11b), gmul(s, 8'h0e, 9'h11b)};
          1, 3: exp_y = {24'h0, s};
          4: exp_y = bswap(be ^ rol32(be, 2) ^ rol32(be, 10) ^ rol32(be, 18) ^ rol32(be, 24));
          5: exp_y = bswap(be ^ rol32(be, 13) ^ rol32(be, 23));
          default: exp_y = 32'h0;
        endcase
        @(posedge clk);
        checks++;
        if (y !== exp_y) begin
          failures++;
          if (failures < 10) $display("op=%0d s=%02x got=%08x exp=%08x", o, s, y, exp_y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
