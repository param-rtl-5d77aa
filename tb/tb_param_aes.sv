// tb_param_aes -- AES-128 encryption running as software on the processor,
// at its default sizes (16 KB caches), with the behavioural memory.
//
// AES-128 in software is the workload this kind of processor is hardened
// for: its SubBytes step indexes a 256-byte table with plaintext ^ key, so
// the data cache, its buffers and the register file all carry key-dependent
// values. The program, assembled here from RV32IM encoders, first expands
// the 16-byte key into 176 bytes of round keys (word loads, RotWord, SubWord
// through the table, Rcon by xtime). It then encrypts NB blocks. Each block
// takes AddRoundKey, then 10 rounds of SubBytes (byte loads and stores
// through the table), ShiftRows, MixColumns (skipped in the last round)
// and AddRoundKey, in separate loops. The S-box is computed here from its
// definition (the inverse in GF(2^8) followed by the affine map) and placed
// in memory. The reference model below is checked first against the
// FIPS-197 example vector. Then every ciphertext byte written by the
// processor is compared with it. One key change is requested in the middle
// of the run, so part of the encryption runs under each obfuscation key. The
// cycle count per block is printed; the design gives no figure to hold it
// against.
module tb_param_aes;
  import param_pkg::*;
  import tb_asm_pkg::*;
  int checks = 0, failures = 0;
  localparam int NB = 8;
  localparam int SBOX = 32'h1000, KEY = 32'h1100, RK = 32'h1200, ST = 32'h1300, TMP = 32'h1310;
  localparam int PT = 32'h1400, CT = 32'h1800;

  logic clk = 0, rst_n = 0, key_change_req = 0;
  logic bus_req_valid, bus_req_ready, bus_resp_valid, halted, remap_busy;
  mem_req_t bus_req;
  logic [31:0] bus_resp_rdata;
  logic [15:0] remap_count;
  logic ev_retire, ev_mispredict, ev_load_use, ev_dc_stall, ev_md_stall, ev_fwd_ex, ev_fwd_prf;
  logic ev_dc_miss, ev_dc_writeback;
  param_top dut (.*);
  param_mem_model #(.WORDS(16384), .LATENCY(2)) mem (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- reference AES-128
  function automatic logic [7:0] xt(logic [7:0] v);
    return {v[6:0], 1'b0} ^ (v[7] ? 8'h1b : 8'h00);
  endfunction
  function automatic logic [7:0] gmul(logic [7:0] a, logic [7:0] b);
    logic [7:0] p;
    p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= a;
      a = xt(a);
    end
    return p;
  endfunction
  function automatic logic [7:0] aes_sbox(logic [7:0] x);
    logic [7:0] inv, s;
    inv = 8'h01;
    for (int i = 0; i < 254; i++) inv = gmul(inv, x);   // x^254 = x^-1 (0 -> 0)
    s = inv;
    for (int i = 1; i <= 4; i++) s ^= (inv << i) | (inv >> (8 - i));
    return s ^ 8'h63;
  endfunction
  logic [7:0] sbx [256];

  function automatic void ref_encrypt(input logic [7:0] key [16], input logic [7:0] pt [16],
                                      output logic [7:0] ct [16]);
    logic [7:0] w [176], s [16], t [16];
    logic [7:0] rc;
    rc = 8'h01;
    for (int i = 0; i < 16; i++) w[i] = key[i];
    for (int i = 16; i < 176; i += 4) begin
      logic [7:0] tmp [4];
      for (int j = 0; j < 4; j++) tmp[j] = w[i - 4 + j];
      if (i % 16 == 0) begin
        logic [7:0] a;
        a = tmp[0];
        tmp[0] = sbx[tmp[1]] ^ rc; tmp[1] = sbx[tmp[2]]; tmp[2] = sbx[tmp[3]]; tmp[3] = sbx[a];
        rc = xt(rc);
      end
      for (int j = 0; j < 4; j++) w[i + j] = w[i - 16 + j] ^ tmp[j];
    end
    for (int i = 0; i < 16; i++) s[i] = pt[i] ^ w[i];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) s[i] = sbx[s[i]];
      for (int c = 0; c < 4; c++) for (int q = 0; q < 4; q++) t[q + 4 * c] = s[q + 4 * ((c + q) % 4)];
      for (int c = 0; c < 4; c++) begin
        if (r != 10) begin
          logic [7:0] a0, a1, a2, a3;
          a0 = t[4 * c]; a1 = t[4 * c + 1]; a2 = t[4 * c + 2]; a3 = t[4 * c + 3];
          s[4 * c]     = xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3;
          s[4 * c + 1] = a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3;
          s[4 * c + 2] = a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3;
          s[4 * c + 3] = xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3);
        end else for (int q = 0; q < 4; q++) s[4 * c + q] = t[4 * c + q];
      end
      for (int i = 0; i < 16; i++) s[i] ^= w[16 * r + i];
    end
    ct = s;
  endfunction

  // ------------------------------------------------------------ assembler
  logic [31:0] P [$];
  int lab [string];
  function automatic void E(logic [31:0] i); P.push_back(i); endfunction
  function automatic void L(string n); lab[n] = P.size() * 4; endfunction
  function automatic int off(string n);
    return lab.exists(n) ? lab[n] - P.size() * 4 : 0;
  endfunction
  function automatic void li(int rd, int v);
    if (v < 2048) E(addi(rd, 0, v));
    else begin
      E(lui(rd, (v + 32'h800) >>> 12));
      E(addi(rd, rd, v - (((v + 32'h800) >>> 12) << 12)));
    end
  endfunction
  function automatic logic [31:0] srli(int rd, int rs1, int s); return i_t(s, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] xori(int rd, int rs1, int v); return i_t(v, rs1, 3'b100, rd, 7'b0010011); endfunction
  // rd = xtime(rs) for a byte in rs; uses t
  function automatic void xtime(int rd, int rs, int t);
    E(srli(t, rs, 7)); E(sub(t, 0, t)); E(andi(t, t, 8'h1b));
    E(slli(rd, rs, 1)); E(xor_(rd, rd, t)); E(andi(rd, rd, 255));
  endfunction

  function automatic void gen();
    P.delete();
    li(20, SBOX); li(21, RK); li(22, PT); li(23, CT); li(24, NB); li(25, ST); li(27, TMP);
    // ---- key expansion (words, little-endian: byte 0 in bits 7:0)
    li(5, KEY);
    for (int w = 0; w < 4; w++) begin E(lw(8, 5, 4 * w)); E(sw(8, 21, 4 * w)); end
    E(addi(6, 0, 4)); E(addi(7, 0, 1)); E(addi(9, 21, 16));
    L("kx");
    E(lw(8, 9, -4));
    E(andi(10, 6, 3)); E(bne(10, 0, off("kx_nosub")));
    E(srli(11, 8, 8)); E(slli(12, 8, 24)); E(or_(8, 11, 12));        // RotWord
    E(addi(13, 0, 0));
    for (int b = 0; b < 4; b++) begin                                 // SubWord
      E(srli(11, 8, 8 * b)); E(andi(11, 11, 255)); E(add(11, 11, 20)); E(lbu(11, 11, 0));
      E(slli(11, 11, 8 * b)); E(or_(13, 13, 11));
    end
    E(xor_(8, 13, 7));
    E(slli(7, 7, 1)); E(srli(11, 7, 8)); E(sub(11, 0, 11)); E(andi(11, 11, 12'h11b)); E(xor_(7, 7, 11));
    L("kx_nosub");
    E(lw(11, 9, -16)); E(xor_(8, 8, 11)); E(sw(8, 9, 0));
    E(addi(9, 9, 4)); E(addi(6, 6, 1)); E(addi(29, 0, 44)); E(blt(6, 29, off("kx")));
    // ---- blocks
    L("blk");
    E(addi(9, 21, 0));
    for (int w = 0; w < 4; w++) begin                                 // AddRoundKey 0
      E(lw(11, 22, 4 * w)); E(lw(12, 9, 4 * w)); E(xor_(11, 11, 12)); E(sw(11, 25, 4 * w));
    end
    E(addi(9, 9, 16)); E(addi(26, 0, 1));
    L("round");
    E(addi(10, 0, 0));                                                // SubBytes
    L("sb");
    E(add(11, 25, 10)); E(lbu(12, 11, 0)); E(add(12, 12, 20)); E(lbu(12, 12, 0)); E(sb(12, 11, 0));
    E(addi(10, 10, 1)); E(addi(29, 0, 16)); E(blt(10, 29, off("sb")));
    for (int c = 0; c < 4; c++) for (int q = 0; q < 4; q++) begin    // ShiftRows ST -> TMP
      E(lbu(12, 25, q + 4 * ((c + q) % 4))); E(sb(12, 27, q + 4 * c));
    end
    E(addi(29, 0, 10)); E(beq(26, 29, off("last")));
    E(addi(10, 27, 0)); E(addi(11, 25, 0)); E(addi(28, 27, 16));      // MixColumns TMP -> ST
    L("mc");
    for (int q = 0; q < 4; q++) E(lbu(12 + q, 10, q));
    E(xor_(16, 12, 13)); E(xor_(16, 16, 14)); E(xor_(16, 16, 15));
    for (int q = 0; q < 4; q++) begin
      E(xor_(17, 12 + q, 12 + (q + 1) % 4));
      xtime(18, 17, 19);
      E(xor_(18, 18, 16)); E(xor_(18, 18, 12 + q)); E(sb(18, 11, q));
    end
    E(addi(10, 10, 4)); E(addi(11, 11, 4)); E(blt(10, 28, off("mc")));
    E(jal(0, off("ark")));
    L("last");
    for (int w = 0; w < 4; w++) begin E(lw(12, 27, 4 * w)); E(sw(12, 25, 4 * w)); end
    L("ark");
    for (int w = 0; w < 4; w++) begin
      E(lw(11, 25, 4 * w)); E(lw(12, 9, 4 * w)); E(xor_(11, 11, 12)); E(sw(11, 25, 4 * w));
    end
    E(addi(9, 9, 16)); E(addi(26, 26, 1)); E(addi(29, 0, 11)); E(blt(26, 29, off("round")));
    for (int w = 0; w < 4; w++) begin E(lw(12, 25, 4 * w)); E(sw(12, 23, 4 * w)); end
    E(addi(22, 22, 16)); E(addi(23, 23, 16)); E(addi(24, 24, -1)); E(bne(24, 0, off("blk")));
    E(ebreak());
  endfunction

  function automatic logic [7:0] kb(int i); return 8'(i * 29 + 7); endfunction
  function automatic logic [7:0] pb(int i); return 8'(i * 53 + i / 16 + 3); endfunction

  task automatic request_key_change();
    @(negedge clk); key_change_req = 1;
    @(negedge clk); key_change_req = 0;
    @(negedge clk);
    while (remap_busy) @(negedge clk);
  endtask

  initial begin
    logic [7:0] k [16], p [16], c [16];
    int retired, cyc;
    logic [63:0] k0;
    for (int i = 0; i < 256; i++) sbx[i] = aes_sbox(8'(i));
    // the reference model against the FIPS-197 example
    for (int i = 0; i < 16; i++) begin k[i] = 8'(i); p[i] = 8'(i * 17); end
    ref_encrypt(k, p, c);
    checks++;
    if ({c[0], c[1], c[2], c[3], c[15]} !== {8'h69, 8'hc4, 8'he0, 8'hd8, 8'h5a}) begin
      failures++; $display("FAIL reference AES does not match the FIPS-197 example");
    end
    gen(); gen();                      // second pass resolves forward labels
    for (int i = 0; i < 16384; i++) mem.mem[i] = 0;
    foreach (P[i]) mem.mem[i] = P[i];
    for (int i = 0; i < 256; i++) mem.mem[(SBOX + i) / 4][8 * (i % 4) +: 8] = sbx[i];
    for (int i = 0; i < 16; i++) mem.mem[(KEY + i) / 4][8 * (i % 4) +: 8] = kb(i);
    for (int i = 0; i < 16 * NB; i++) mem.mem[(PT + i) / 4][8 * (i % 4) +: 8] = pb(i);
    retired = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    k0 = dut.key;
    cyc = 0;
    fork
      forever begin @(posedge clk); retired += ev_retire; end
      begin
        while (retired < 12000) @(negedge clk);
        request_key_change();
      end
    join_none
    while (!halted) begin @(negedge clk); cyc++; end
    request_key_change();              // writes the last dirty lines back
    disable fork;
    checks++;
    if (remap_count != 2 || dut.key === k0) begin failures++; $display("FAIL key changes"); end
    for (int i = 0; i < 16; i++) k[i] = kb(i);
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < 16; i++) p[i] = pb(16 * b + i);
      ref_encrypt(k, p, c);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (mem.mem[(CT + 16 * b + i) / 4][8 * (i % 4) +: 8] !== c[i]) begin
          failures++;
          if (failures < 10) $display("FAIL block %0d byte %0d: %h expected %h", b, i,
                                      mem.mem[(CT + 16 * b + i) / 4][8 * (i % 4) +: 8], c[i]);
        end
      end
    end
    $display("AES-128: %0d blocks, %0d instructions retired, %0d cycles (%0d per block incl. key expansion)",
             NB, retired, cyc, cyc / NB);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
