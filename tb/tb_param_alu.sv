// tb_param_alu -- random operands for every ALU operation and every branch
// condition, compared with a behavioural model.
module tb_param_alu;
  import param_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op;
  logic [31:0] a, b, y, e;
  logic [2:0] br_funct3;
  logic br_taken, eb;
  param_alu dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      op = alu_op_e'($urandom % 11);
      a = $urandom; b = ($urandom % 3 == 0) ? a : $urandom;
      br_funct3 = $urandom;
      #1;
      case (op)
        ALU_ADD: e = a + b;  ALU_SUB: e = a - b;  ALU_SLL: e = a << b[4:0];
        ALU_SLT: e = (int'(a) < int'(b)) ? 1 : 0;
        ALU_SLTU: e = (a < b) ? 1 : 0;  ALU_XOR: e = a ^ b;
        ALU_SRL: e = a >> b[4:0];  ALU_SRA: e = 32'(int'(a) >>> b[4:0]);
        ALU_OR: e = a | b;  ALU_AND: e = a & b;  default: e = b;
      endcase
      case (br_funct3)
        3'b000: eb = a == b; 3'b001: eb = a != b; 3'b100: eb = int'(a) < int'(b);
        3'b101: eb = int'(a) >= int'(b); 3'b110: eb = a < b; 3'b111: eb = a >= b; default: eb = 0;
      endcase
      checks += 2;
      if (y !== e) begin failures++; $display("FAIL op %s a=%h b=%h y=%h e=%h", op.name(), a, b, y, e); end
      if (br_taken !== eb) begin failures++; $display("FAIL br %0d", br_funct3); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
