// tb_prog_pkg -- the test program run by the core and top-level testbenches,
// and the expected results worked out independently in SystemVerilog.
//
// Memory map (bytes): code at 0x0000; S-box table at 0x1000 (256 bytes);
// plaintext p at 0x1100 (NP bytes); key k at 0x1200 (16 bytes); output
// S[p ^ k] at 0x1300 (NP bytes); result words at 0x1400; an array of BIG
// words at 0x2000.
// The first loop is the SubBytes step of a table-based AES: for each byte,
// load p and k, XOR them, add the table base and load S[p ^ k], then store it
// and add it into a sum. Then mul/div/rem/mulh, a half-word store and signed
// half-word load, JAL and JALR, and finally a loop writing BIG words and a
// loop summing them back.
package tb_prog_pkg;
  import tb_asm_pkg::*;

  localparam int S_BASE = 32'h1000, P_BASE = 32'h1100, K_BASE = 32'h1200;
  localparam int O_BASE = 32'h1300, R_BASE = 32'h1400, B_BASE = 32'h2000;

  function automatic logic [7:0] sbox(int i);      // any fixed byte table will do
    return 8'((i * 167 + 13) ^ (i >> 3));
  endfunction
  function automatic logic [7:0] pbyte(int i, int seed); return 8'(i * 31 + seed * 7 + 5); endfunction
  function automatic logic [7:0] kbyte(int i, int seed); return 8'(i * 91 + seed * 3 + 1); endfunction

  // BIG must be a multiple of 1024 words.
  function automatic void build(ref logic [31:0] prog [$], input int NP, input int BIG,
                                output int jal_addr);
    int loop1, loop2, loop3;
    prog.delete();
    prog.push_back(lui(1, 1));              // x1 = 0x1000  S
    prog.push_back(addi(2, 1, 'h100));      // x2 = p
    prog.push_back(addi(3, 1, 'h200));      // x3 = k
    prog.push_back(addi(4, 1, 'h300));      // x4 = out
    prog.push_back(addi(20, 1, 'h400));     // x20 = results
    prog.push_back(addi(5, 0, 0));          // i
    prog.push_back(addi(6, 0, NP));
    prog.push_back(addi(16, 0, 0));         // sum
    loop1 = prog.size();
    prog.push_back(add(7, 2, 5));
    prog.push_back(lbu(12, 7, 0));          // a2 = p[i]
    prog.push_back(andi(8, 5, 15));
    prog.push_back(add(8, 3, 8));
    prog.push_back(lbu(14, 8, 0));          // a4 = k[i % 16]
    prog.push_back(xor_(15, 12, 14));       // p ^ k  (load-use)
    prog.push_back(add(17, 15, 1));         // a7 = S + (p ^ k)
    prog.push_back(lbu(18, 17, 0));         // S[p ^ k]
    prog.push_back(add(9, 4, 5));
    prog.push_back(sb(18, 9, 0));           // out[i]
    prog.push_back(add(16, 16, 18));
    prog.push_back(addi(5, 5, 1));
    prog.push_back(blt(5, 6, (loop1 - prog.size()) * 4));
    prog.push_back(sw(16, 20, 0));          // r0 = sum
    prog.push_back(lui(10, 'h01010));
    prog.push_back(addi(10, 10, 'h101));    // 0x01010101
    prog.push_back(mul(11, 16, 10));
    prog.push_back(sw(11, 20, 4));          // r1
    prog.push_back(addi(13, 0, 7));
    prog.push_back(div(11, 11, 13));
    prog.push_back(sw(11, 20, 8));          // r2
    prog.push_back(remu(11, 16, 13));
    prog.push_back(sw(11, 20, 12));         // r3
    prog.push_back(addi(13, 0, -3));
    prog.push_back(mulh(11, 10, 13));
    prog.push_back(sw(11, 20, 16));         // r4
    prog.push_back(addi(11, 0, -2000));
    prog.push_back(sh(11, 20, 20));         // r5 low half
    prog.push_back(lh(12, 20, 20));
    prog.push_back(addi(12, 12, 1));
    prog.push_back(sw(12, 20, 24));         // r6 = -1999
    jal_addr = prog.size() * 4;
    prog.push_back(jal(13, 8));             // A
    prog.push_back(addi(12, 0, 99));        // A+4 skipped
    prog.push_back(sw(13, 20, 28));         // A+8  r7 = A+4
    prog.push_back(addi(14, 13, 12));       // A+12 x14 = A+16
    prog.push_back(jalr(15, 14, 8));        // A+16 -> A+24, x15 = A+20
    prog.push_back(addi(12, 0, 77));        // A+20 skipped
    prog.push_back(sw(15, 20, 36));         // A+24 r9 = A+20
    prog.push_back(sw(12, 20, 40));         // r10 = -1999
    prog.push_back(lui(21, B_BASE >> 12));
    prog.push_back(lui(9, (B_BASE + BIG * 4) >> 12));
    prog.push_back(addi(7, 0, 1));
    prog.push_back(add(8, 21, 0));
    loop2 = prog.size();
    prog.push_back(sw(7, 8, 0));
    prog.push_back(addi(7, 7, 3));
    prog.push_back(addi(8, 8, 4));
    prog.push_back(blt(8, 9, (loop2 - prog.size()) * 4));
    prog.push_back(add(8, 21, 0));
    prog.push_back(addi(16, 0, 0));
    loop3 = prog.size();
    prog.push_back(lw(7, 8, 0));
    prog.push_back(add(16, 16, 7));         // load-use
    prog.push_back(addi(8, 8, 4));
    prog.push_back(blt(8, 9, (loop3 - prog.size()) * 4));
    prog.push_back(sw(16, 20, 32));         // r8
    prog.push_back(ebreak());
  endfunction

  // expected result words r0..r10
  function automatic void expected(input int NP, input int BIG, input int seed, input int jal_addr,
                                   output logic [31:0] r [11], output logic [7:0] outb [$]);
    logic [31:0] sum;
    longint prod;
    sum = 0;
    outb.delete();
    for (int i = 0; i < NP; i++) begin
      logic [7:0] o;
      o = sbox(int'(pbyte(i, seed) ^ kbyte(i % 16, seed)));
      outb.push_back(o);
      sum += o;
    end
    r[0] = sum;
    r[1] = sum * 32'h0101_0101;
    r[2] = 32'(int'(r[1]) / 7);
    r[3] = sum % 7;
    prod = longint'(32'sh0101_0101) * longint'(-3);
    r[4] = prod[63:32];
    r[5] = 32'h0000_F830;
    r[6] = -1999;
    r[7] = jal_addr + 4;
    r[8] = 0;
    for (int j = 0; j < BIG; j++) r[8] += 3 * j + 1;
    r[9] = jal_addr + 20;
    r[10] = -1999;
  endfunction
endpackage
