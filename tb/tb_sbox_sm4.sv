// tb_sbox_sm4 -- exhaustive test of the SM4 S-box (sbox_sm4).
//
// Applies all 256 input bytes, one per clock cycle, and compares the output
// with a reference computed as a GF(2^8) inversion plus the standard affine
// maps (tb_ref_pkg), and the first table row with the published values.
// This covers the top layer, the shared middle layer and the bottom layer.
module tb_sbox_sm4;
  import tb_ref_pkg::*;

  logic       clk = 1'b0;
  logic [7:0] din, dout;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  sbox_sm4 dut (.x(din), .s(dout));

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      din = 8'(i);
      @(posedge clk);
      checks++;
      if (dout !== sm4_sbox(8'(i))) begin
        failures++;
        $display("mismatch in=%02x got=%02x exp=%02x", i, dout, sm4_sbox(8'(i)));
      end
      if (i < 16) begin
        checks++;
        if (dout !== SM4_ROW0[i]) begin
          failures++;
          $display("table mismatch in=%02x got=%02x exp=%02x", i, dout, SM4_ROW0[i]);
        end
      end
    end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      din = 8'(8'hf0 + i);
      @(posedge clk);
      checks++;
      if (dout !== SM4_ROWF[i]) begin
        failures++;
        $display("table mismatch in=%02x got=%02x exp=%02x", 8'hf0 + i, dout, SM4_ROWF[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
