// tb_param_muldiv -- all eight RV32M operations on random and corner operands
// against a behavioural model; checks the latency (2 cycles for multiply,
// 35 for divide, counted from the cycle start is first high) and that the
// unit's operand register holds 0 while no mul/div instruction is present.
module tb_param_muldiv;
  import param_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  md_op_e op;
  logic [31:0] a, b, result;
  param_muldiv dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] model(md_op_e o, logic [31:0] x, logic [31:0] y);
    longint sx = longint'(int'(x)), sy = longint'(int'(y));
    longint ux = longint'({32'b0, x}), uy = longint'({32'b0, y});
    case (o)
      MD_MUL:    return 32'(sx * sy);
      MD_MULH:   return 32'((sx * sy) >>> 32);
      MD_MULHSU: return 32'((sx * uy) >>> 32);
      MD_MULHU:  return 32'((ux * uy) >> 32);
      MD_DIV:    return (y == 0) ? 32'hFFFF_FFFF : (x == 32'h8000_0000 && y == 32'hFFFF_FFFF) ? x : 32'(int'(x) / int'(y));
      MD_DIVU:   return (y == 0) ? 32'hFFFF_FFFF : x / y;
      MD_REM:    return (y == 0) ? x : (x == 32'h8000_0000 && y == 32'hFFFF_FFFF) ? 0 : 32'(int'(x) % int'(y));
      default:   return (y == 0) ? x : x % y;
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; op = MD_MUL; a = 0; b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int cyc;
      cyc = 0;
      // idle cycles with other (ALU) operands on the inputs: register must stay 0
      a = $urandom; b = $urandom;
      repeat (2) begin
        @(negedge clk);
        checks++;
        if (dut.a_q !== 0 || dut.b_q !== 0) begin failures++; $display("FAIL operand register not gated"); end
      end
      op = md_op_e'($urandom % 8);
      case ($urandom % 6)
        0: b = 0;
        1: begin a = 32'h8000_0000; b = 32'hFFFF_FFFF; end
        2: b = $urandom % 16;
        default: ;
      endcase
      start = 1;
      do begin @(negedge clk); cyc++; end while (!done && cyc < 100);
      start = 0;
      checks += 2;
      if (result !== model(op, a, b)) begin
        failures++; $display("FAIL %s a=%h b=%h r=%h e=%h", op.name(), a, b, result, model(op, a, b));
      end
      if (cyc != (op[2] ? 35 : 2)) begin failures++; $display("FAIL latency %s %0d", op.name(), cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
