// param_pkg -- constants and types shared by the PARAM processor.
//
// PARAM keeps every data word of the load/store datapath in an obfuscated
// form d' = O_k(d), where O_k is a 4-round, 32-bit Feistel network keyed by a
// 64-bit key (four 16-bit round keys). This package holds the affine matrix of
// the round function, the round constants, the RV32IM opcode and operation
// encodings used by the pipeline, and the cache geometry.
//
// From the paper: the 4-round 32-bit Feistel structure, 16-bit halves and
// 16-bit round keys, the 16x32 affine matrix of the first round (Fig. 15),
// 64-byte cache lines, 16 KB caches and a 5-stage in-order pipeline.
// Own choices: the round constants (printed only as symbols c0..c15), the use
// of the first-round matrix in all four rounds (only the first round's matrix
// is printed), the repair of two printed matrix rows (row y2 is printed with
// 31 entries and is padded with a final 0; row y14 is printed with 33 entries
// and its last entry is dropped), a 32-bit (RV32IM) datapath instead of the
// 64-bit one of the baseline core, and the 2-way / 128-set data cache layout.
package param_pkg;

  localparam int unsigned XLEN      = 32;
  localparam int unsigned HALF_W    = 16;
  localparam int unsigned ROUNDS    = 4;
  localparam int unsigned KEY_W     = ROUNDS * HALF_W;   // 64
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_WORDS = LINE_BYTES / 4;   // 16
  localparam int unsigned OFFSET_W   = 6;                // byte offset in a line

  // Row r of the affine matrix A: bit j is the printed entry in column x_j.
  // x_0..x_15 are the bits of the right half R, x_16..x_31 those of the round key K.
  localparam logic [31:0] AFFINE_ROW [HALF_W] = '{
    32'b01101100011100011111101111000001, // y0
    32'b01010100111010000100001101110010, // y1
    32'b01001000000111000000001011100110, // y2  (printed with 31 entries, padded)
    32'b11011101101110111110011001001110, // y3
    32'b01101101000011110100011101011111, // y4
    32'b11111111101001101010011101001000, // y5
    32'b11011000101000010010010010001010, // y6
    32'b00001111100110000010100001001010, // y7
    32'b11011000111000011010101000001000, // y8
    32'b00011000111100011111101100111110, // y9
    32'b00110010110011110110010111000111, // y10
    32'b11110110110110000011110101011100, // y11
    32'b01010001010011011011100010110001, // y12
    32'b10111001111101001101100000101001, // y13
    32'b01011111111101100100100001110111, // y14 (printed with 33 entries, truncated)
    32'b01101011110011101100101001110110  // y15
  };

  // Round constants C of rounds 1..4 (own choice; the paper prints only symbols).
  localparam logic [HALF_W-1:0] ROUND_CONST [ROUNDS] = '{
    16'h5A3C, 16'hC3A5, 16'h9E37, 16'h7F4A
  };

  // ---------------------------------------------------------------- RV32IM
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  // funct3 of the M extension, used as the mul/div operation code.
  typedef enum logic [2:0] {
    MD_MUL = 3'd0, MD_MULH = 3'd1, MD_MULHSU = 3'd2, MD_MULHU = 3'd3,
    MD_DIV = 3'd4, MD_DIVU = 3'd5, MD_REM = 3'd6, MD_REMU = 3'd7
  } md_op_e;

  // Which execution unit an instruction belongs to.
  typedef enum logic [1:0] { FU_ALU, FU_MULDIV, FU_NONE } fu_e;

  // One word request of a cache to the cache controller (and on to memory).
  typedef struct packed {
    logic        we;
    logic [31:0] addr;   // plain (de-obfuscated) byte address
    logic [31:0] wdata;  // plain data
  } mem_req_t;

  // Sign/zero extension of a loaded byte or half-word (funct3 of the load).
  function automatic logic [31:0] load_extract(input logic [31:0] word,
                                               input logic [1:0]  boff,
                                               input logic [2:0]  funct3);
    logic [31:0] sh;
    sh = word >> (8 * boff);
    case (funct3)
      3'b000:  return {{24{sh[7]}},  sh[7:0]};
      3'b001:  return {{16{sh[15]}}, sh[15:0]};
      3'b100:  return {24'b0, sh[7:0]};
      3'b101:  return {16'b0, sh[15:0]};
      default: return word;
    endcase
  endfunction

  // Merge a store of funct3 size into an existing plain word.
  function automatic logic [31:0] store_merge(input logic [31:0] old_word,
                                              input logic [31:0] sdata,
                                              input logic [1:0]  boff,
                                              input logic [2:0]  funct3);
    logic [31:0] mask;
    case (funct3[1:0])
      2'b00:   mask = 32'h0000_00FF << (8 * boff);
      2'b01:   mask = 32'h0000_FFFF << (8 * boff);
      default: mask = 32'hFFFF_FFFF;
    endcase
    return (old_word & ~mask) | ((sdata << (8 * boff)) & mask);
  endfunction

endpackage
