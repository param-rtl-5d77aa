// tb_asm_pkg -- RV32IM instruction encoders used to build test programs.
package tb_asm_pkg;
  function automatic logic [31:0] r_t(input logic [6:0] f7, input int rs2, input int rs1,
                                      input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] i_t(input int imm, input int rs1, input logic [2:0] f3,
                                      input int rd, input logic [6:0] op);
    logic [11:0] im = 12'(imm);
    return {im, 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] s_t(input int imm, input int rs2, input int rs1,
                                      input logic [2:0] f3);
    logic [11:0] im = 12'(imm);
    return {im[11:5], 5'(rs2), 5'(rs1), f3, im[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(input int off, input int rs2, input int rs1,
                                      input logic [2:0] f3);
    logic [12:0] im = 13'(off);
    return {im[12], im[10:5], 5'(rs2), 5'(rs1), f3, im[4:1], im[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_t(sh,  rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh);  return i_t(sh | 32'h400, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] add (int rd, int a, int b); return r_t(7'h00, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sub (int rd, int a, int b); return r_t(7'h20, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] xor_(int rd, int a, int b); return r_t(7'h00, b, a, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] or_ (int rd, int a, int b); return r_t(7'h00, b, a, 3'b110, rd, 7'b0110011); endfunction
  function automatic logic [31:0] sltu(int rd, int a, int b); return r_t(7'h00, b, a, 3'b011, rd, 7'b0110011); endfunction
  function automatic logic [31:0] mul (int rd, int a, int b); return r_t(7'h01, b, a, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] mulh(int rd, int a, int b); return r_t(7'h01, b, a, 3'b001, rd, 7'b0110011); endfunction
  function automatic logic [31:0] div (int rd, int a, int b); return r_t(7'h01, b, a, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] remu(int rd, int a, int b); return r_t(7'h01, b, a, 3'b111, rd, 7'b0110011); endfunction
  function automatic logic [31:0] lw  (int rd, int rs1, int imm); return i_t(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lbu (int rd, int rs1, int imm); return i_t(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic logic [31:0] lh  (int rd, int rs1, int imm); return i_t(imm, rs1, 3'b001, rd, 7'b0000011); endfunction
  function automatic logic [31:0] sw  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'b010); endfunction
  function automatic logic [31:0] sb  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] sh  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] beq (int a, int b, int off); return b_t(off, b, a, 3'b000); endfunction
  function automatic logic [31:0] bne (int a, int b, int off); return b_t(off, b, a, 3'b001); endfunction
  function automatic logic [31:0] blt (int a, int b, int off); return b_t(off, b, a, 3'b100); endfunction
  function automatic logic [31:0] lui (int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] jal (int rd, int off);
    logic [20:0] im = 21'(off);
    return {im[20], im[10:1], im[11], im[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b000, rd, 7'b1100111); endfunction
  function automatic logic [31:0] ebreak(); return 32'h0010_0073; endfunction
endpackage
