// param_alu -- integer ALU of the PARAM execute stage.
//
// Works on plain (de-obfuscated) operands: the execute stage removes the
// obfuscation of the operands in front of it and re-obfuscates its result.
// Computes the RV32I operations selected by `op` and, separately, the branch
// condition of a conditional branch selected by its funct3. Combinational.
//
// From the paper: an ALU in the execute stage operating on de-obfuscated
// operands (the paper leaves the ALU itself unprotected). Own choices: the
// RV32I operation set and encoding.
module param_alu
  import param_pkg::*;
(
  input  alu_op_e         op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic [XLEN-1:0] y,
  input  logic [2:0]      br_funct3,
  output logic            br_taken
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'b0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = $unsigned($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      default:   y = a + b;
    endcase
  end

  always_comb begin
    case (br_funct3)
      3'b000:  br_taken = (a == b);
      3'b001:  br_taken = (a != b);
      3'b100:  br_taken = $signed(a) <  $signed(b);
      3'b101:  br_taken = $signed(a) >= $signed(b);
      3'b110:  br_taken = a <  b;
      3'b111:  br_taken = a >= b;
      default: br_taken = 1'b0;
    endcase
  end
endmodule
