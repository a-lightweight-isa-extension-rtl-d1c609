// tb_sbox_mid -- test of the shared middle layer (sbox_mid).
//
// The middle layer has no meaning on its own: it computes a GF(2^8) inverse
// spread over 18 product bits. It is checked through all three S-boxes that
// share it: for every input byte, the AES, inverse AES and SM4 S-boxes built
// around it must match the reference models of tb_ref_pkg.
module tb_sbox_mid;
  import tb_ref_pkg::*;

  logic       clk = 1'b0;
  logic [7:0] din, s_aes, s_aesi, s_sm4;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  sbox_aes  u_aes  (.x(din), .s(s_aes));
  sbox_aesi u_aesi (.y(din), .s(s_aesi));
  sbox_sm4  u_sm4  (.x(din), .s(s_sm4));

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
      checks += 3;
      if (s_aes !== aes_sbox(8'(i)))      begin failures++; $display("aes  %02x: %02x", i, s_aes);  end
      if (s_aesi !== aes_inv_sbox(8'(i))) begin failures++; $display("aesi %02x: %02x", i, s_aesi); end
      if (s_sm4 !== sm4_sbox(8'(i)))      begin failures++; $display("sm4  %02x: %02x", i, s_sm4);  end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
