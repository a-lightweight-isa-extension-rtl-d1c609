// tb_saes32_cx -- end-to-end test of the SAES32/SSM4 execution unit.
//
// The testbench plays the host RV32 core: it holds the 32-entry register
// file and a small data memory, issues SAES32/SSM4 instruction words to the
// unit one per clock cycle, and writes rd_val back when rd_we is set. The
// base-ISA instructions a real program would also need (lw, xor, xori,
// rotate) are executed by the testbench itself and counted. On this "core"
// it runs complete cipher programs written in the style the instructions are
// meant for (two sets of four state registers, round keys as the initial
// value of the destination registers, rd = rs1):
//   - AES-128/192/256 key expansion (saes32.encs), encryption (saes32.encsm,
//     saes32.encs), against the FIPS-197 Appendix C vectors;
//   - AES-128/192/256 decryption with the equivalent inverse cipher, the
//     decryption keys being made with saes32.encs + saes32.decsm;
//   - SM4 key schedule (ssm4.ks), encryption and decryption (ssm4.ed), with
//     10 XORs per round thanks to shared partial sums, against the standard's
//     example vector.
// Every instruction's result is also compared with the reference model, and
// the per-round instruction counts are checked: 16 SAES32 per AES round; 16
// ssm4.ed and 10 XOR per SM4 round. Unused code points must raise `illegal`
// and other opcodes must be ignored. Each mechanism is counted and one that
// never happened counts as a failure.
module tb_saes32_cx;
  import tb_ref_pkg::*;
  import saes32_pkg::*;

  logic        clk = 1'b0;
  logic [31:0] instr;
  logic [4:0]  rs1_idx, rs2_idx, rd_idx;
  logic [31:0] rs1_val, rs2_val, rd_val;
  logic        rd_we, illegal;
  int          checks = 0, failures = 0;

  logic [31:0] regs [32];
  logic [31:0] mem_rk [64];   // encryption round keys
  logic [31:0] mem_dk [64];   // decryption round keys

  // event counters
  int n_op [8];
  int n_illegal = 0, n_ignored = 0, n_two_operand = 0;
  int n_lw = 0, n_xor = 0, n_misc = 0;

  always #5 clk = ~clk;

  saes32_cx dut (
    .instr(instr), .rs1_idx(rs1_idx), .rs2_idx(rs2_idx), .rs1_val(rs1_val), .rs2_val(rs2_val),
    .rd_we(rd_we), .rd_idx(rd_idx), .rd_val(rd_val), .illegal(illegal)
  );

  always_comb begin
    rs1_val = regs[rs1_idx];
    rs2_val = regs[rs2_idx];
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- the "core": one SAES32/SSM4 instruction per cycle ----------------
  task automatic saes(input saes32_op_e op, input int bs, input int rd, input int rs1, input int rs2);
    logic [31:0] e;
    @(negedge clk);
    instr = {2'b00, op, 2'(bs), 5'(rs2), 5'(rs1), 3'b000, 5'(rd), OPCODE_CUSTOM0};
    e = saes32_ref(regs[rs1], regs[rs2], {op, 2'(bs)});
    @(posedge clk);
    check(rd_we && !illegal && rd_idx == 5'(rd), "write enable / destination");
    check(rd_val === e, $sformatf("result of op %0d bs %0d: %08x vs %08x", op, bs, rd_val, e));
    if (rd_we && rd_idx != 0) regs[rd_idx] = rd_val;
    n_op[op]++;
    if (rd == rs1) n_two_operand++;
  endtask

  // base-ISA stand-ins
  task automatic lw(input int rd, input logic [31:0] v);
    if (rd != 0) regs[rd] = v;
    n_lw++;
  endtask
  task automatic xor_(input int rd, input int a, input int b);
    if (rd != 0) regs[rd] = regs[a] ^ regs[b];
    n_xor++;
  endtask
  task automatic xori(input int rd, input int a, input logic [31:0] imm);
    if (rd != 0) regs[rd] = regs[a] ^ imm;
    n_xor++;
  endtask
  task automatic rori8(input int rd, input int a);
    if (rd != 0) regs[rd] = {regs[a][7:0], regs[a][31:8]};
    n_misc++;
  endtask

  // word j of an n-byte big-endian test vector, as a little-endian load
  function automatic logic [31:0] le_word(input logic [255:0] v, input int nbytes, input int j);
    logic [31:0] w;
    for (int b = 0; b < 4; b++) w[8*b +: 8] = v[8*(nbytes - 1 - (4*j + b)) +: 8];
    return w;
  endfunction

  // ---- AES ----------------------------------------------------------------
  task automatic aes_keyschedule(input logic [255:0] key, input int nk);
    int nr = nk + 6;
    logic [7:0] rcon = 8'h01;
    for (int j = 0; j < nk; j++) mem_rk[j] = le_word(key, 4*nk, j);
    for (int i = nk; i < 4*(nr+1); i++) begin
      lw(5, mem_rk[i-1]);
      lw(6, mem_rk[i-nk]);
      if (i % nk == 0) begin
        rori8(7, 5);
        xori(6, 6, {24'h0, rcon});
        rcon = gmul(rcon, 8'h02, 9'h11b);
        for (int bs = 0; bs < 4; bs++) saes(OP_AES_ENCS, bs, 6, 6, 7);
      end else if (nk > 6 && i % nk == 4) begin
        for (int bs = 0; bs < 4; bs++) saes(OP_AES_ENCS, bs, 6, 6, 5);
      end else begin
        xor_(6, 6, 5);
      end
      mem_rk[i] = regs[6];
    end
    // decryption keys: InvMixColumns(rk) = decsm(encs(rk)) for the inner rounds
    for (int i = 0; i < 4*(nr+1); i++) begin
      if (i < 4 || i >= 4*nr) mem_dk[i] = mem_rk[i];
      else begin
        lw(5, mem_rk[i]);
        for (int bs = 0; bs < 4; bs++) saes(OP_AES_ENCS, bs, 6, bs == 0 ? 0 : 6, 5);
        for (int bs = 0; bs < 4; bs++) saes(OP_AES_DECSM, bs, 7, bs == 0 ? 0 : 7, 6);
        mem_dk[i] = regs[7];
      end
    end
  endtask

  task automatic aes_encrypt(input logic [127:0] pt, input int nr, output logic [127:0] ct);
    int src = 10, dst = 14, n_start;
    for (int j = 0; j < 4; j++) begin
      lw(10 + j, le_word({128'h0, pt}, 16, j));
      lw(5, mem_rk[j]);
      xor_(10 + j, 10 + j, 5);
    end
    for (int r = 1; r <= nr; r++) begin
      n_start = n_op[OP_AES_ENCSM] + n_op[OP_AES_ENCS];
      for (int j = 0; j < 4; j++) lw(dst + j, mem_rk[4*r + j]);
      for (int j = 0; j < 4; j++)
        for (int i = 0; i < 4; i++)
          saes(r < nr ? OP_AES_ENCSM : OP_AES_ENCS, i, dst + j, dst + j, src + (j + i) % 4);
      check(n_op[OP_AES_ENCSM] + n_op[OP_AES_ENCS] - n_start == 16, "16 SAES32 per AES round");
      {src, dst} = {dst, src};
    end
    for (int j = 0; j < 4; j++)
      for (int b = 0; b < 4; b++) ct[8*(15 - (4*j + b)) +: 8] = regs[src + j][8*b +: 8];
  endtask

  task automatic aes_decrypt(input logic [127:0] ct, input int nr, output logic [127:0] pt);
    int src = 10, dst = 14, n_start;
    for (int j = 0; j < 4; j++) begin
      lw(10 + j, le_word({128'h0, ct}, 16, j));
      lw(5, mem_dk[4*nr + j]);
      xor_(10 + j, 10 + j, 5);
    end
    for (int r = nr - 1; r >= 0; r--) begin
      n_start = n_op[OP_AES_DECSM] + n_op[OP_AES_DECS];
      for (int j = 0; j < 4; j++) lw(dst + j, mem_dk[4*r + j]);
      for (int j = 0; j < 4; j++)
        for (int i = 0; i < 4; i++)
          saes(r > 0 ? OP_AES_DECSM : OP_AES_DECS, i, dst + j, dst + j, src + (j - i + 4) % 4);
      check(n_op[OP_AES_DECSM] + n_op[OP_AES_DECS] - n_start == 16, "16 SAES32 per AES^-1 round");
      {src, dst} = {dst, src};
    end
    for (int j = 0; j < 4; j++)
      for (int b = 0; b < 4; b++) pt[8*(15 - (4*j + b)) +: 8] = regs[src + j][8*b +: 8];
  endtask

  // ---- SM4 ----------------------------------------------------------------
  // One SM4 round (4 steps) on registers x10..x13, with shared XOR terms:
  // 10 XORs and 16 ssm4.ed / ssm4.ks; keys come from lw.
  task automatic sm4_round(input saes32_op_e op, input logic [31:0] k [4]);
    int x0 = 10, x1 = 11, x2 = 12, x3 = 13;
    int xor0 = n_xor, ops0 = n_op[op];
    xor_(6, x2, x3);                 // u = X2^X3
    xor_(7, 6, x1); lw(5, k[0]); xor_(7, 7, 5);
    for (int bs = 0; bs < 4; bs++) saes(op, bs, x0, x0, 7);
    xor_(7, 6, x0); lw(5, k[1]); xor_(7, 7, 5);
    for (int bs = 0; bs < 4; bs++) saes(op, bs, x1, x1, 7);
    xor_(6, x0, x1);                 // w = X4^X5
    xor_(7, 6, x3); lw(5, k[2]); xor_(7, 7, 5);
    for (int bs = 0; bs < 4; bs++) saes(op, bs, x2, x2, 7);
    xor_(7, 6, x2); lw(5, k[3]); xor_(7, 7, 5);
    for (int bs = 0; bs < 4; bs++) saes(op, bs, x3, x3, 7);
    check(n_xor - xor0 == 10 && n_op[op] - ops0 == 16, "SM4 round: 16 ssm4 + 10 xor");
  endtask

  task automatic sm4_keyschedule(input logic [127:0] key);
    logic [31:0] fk [4] = '{32'ha3b1bac6, 32'h56aa3350, 32'h677d9197, 32'hb27022dc};
    logic [31:0] ck [4];
    for (int j = 0; j < 4; j++) begin
      lw(10 + j, le_word({128'h0, key}, 16, j));
      xori(10 + j, 10 + j, bswap(fk[j]));
    end
    for (int r = 0; r < 8; r++) begin
      for (int s = 0; s < 4; s++)
        for (int b = 0; b < 4; b++) ck[s][8*b +: 8] = 8'(7 * (4 * (4*r + s) + b));  // CK, little-endian
      sm4_round(OP_SM4_KS, ck);
      for (int s = 0; s < 4; s++) mem_rk[4*r + s] = regs[10 + s];
    end
  endtask

  task automatic sm4_crypt(input logic [127:0] in, input bit decrypt, output logic [127:0] out);
    logic [31:0] k [4];
    for (int j = 0; j < 4; j++) lw(10 + j, le_word({128'h0, in}, 16, j));
    for (int r = 0; r < 8; r++) begin
      for (int s = 0; s < 4; s++) k[s] = decrypt ? mem_rk[31 - (4*r + s)] : mem_rk[4*r + s];
      sm4_round(OP_SM4_ED, k);
    end
    // output (X35, X34, X33, X32)
    for (int j = 0; j < 4; j++)
      for (int b = 0; b < 4; b++) out[8*(15 - (4*j + b)) +: 8] = regs[13 - j][8*b +: 8];
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] pt, ct, res;
    logic [255:0] key;
    int nk;
    foreach (regs[i]) regs[i] = 32'h0;
    foreach (n_op[i]) n_op[i] = 0;
    instr = 32'h0000_0013;  // nop

    // FIPS-197 Appendix C
    pt = 128'h00112233445566778899aabbccddeeff;
    for (int v = 0; v < 3; v++) begin
      nk  = 4 + 2*v;
      key = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f >> (64 * (2 - v));
      aes_keyschedule(key, nk);
      aes_encrypt(pt, nk + 6, ct);
      case (v)
        0: check(ct == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, $sformatf("AES-128 ct %032x", ct));
        1: check(ct == 128'hdda97ca4864cdfe06eaf70a0ec0d7191, $sformatf("AES-192 ct %032x", ct));
        default: check(ct == 128'h8ea2b7ca516745bfeafc49904b496089, $sformatf("AES-256 ct %032x", ct));
      endcase
      aes_decrypt(ct, nk + 6, res);
      check(res == pt, $sformatf("AES-%0d decrypt %032x", 32*nk, res));
    end

    // SM4 example (GB/T 32907 Appendix A)
    sm4_keyschedule(128'h0123456789abcdeffedcba9876543210);
    check(mem_rk[0] == bswap(32'hf12186f9) && mem_rk[31] == bswap(32'h9124a012), "SM4 rk0/rk31");
    sm4_crypt(128'h0123456789abcdeffedcba9876543210, 1'b0, ct);
    check(ct == 128'h681edf34d206965e86b3e94f536e4246, $sformatf("SM4 ct %032x", ct));
    sm4_crypt(ct, 1'b1, res);
    check(res == 128'h0123456789abcdeffedcba9876543210, $sformatf("SM4 pt %032x", res));

    // unused code points trap, other opcodes pass by
    for (int f = 24; f < 32; f++) begin
      @(negedge clk);
      instr = {2'b00, 5'(f), 5'd11, 5'd10, 3'b000, 5'd12, OPCODE_CUSTOM0};
      @(posedge clk);
      check(illegal && !rd_we, "unused fn traps");
      n_illegal++;
    end
    begin
      logic [31:0] others [3] = '{32'h00b50533, 32'h40b50533, 32'h02b5150b};  // add, sub, custom-0 funct3=1
      foreach (others[i]) begin
        @(negedge clk);
        instr = others[i];
        @(posedge clk);
        check(!illegal && !rd_we, "other opcode ignored");
        n_ignored++;
      end
    end

    // every mechanism happened
    for (int o = 0; o < 6; o++) begin
      check(n_op[o] > 0, $sformatf("op %0d never executed", o));
      $display("op %0d executed %0d times", o, n_op[o]);
    end
    check(n_illegal > 0 && n_ignored > 0 && n_two_operand > 0, "trap / ignore / rd=rs1 seen");
    $display("illegal=%0d ignored=%0d rd=rs1=%0d lw=%0d xor=%0d other=%0d",
             n_illegal, n_ignored, n_two_operand, n_lw, n_xor, n_misc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
