// tb_param_regfile -- random writes and reads against an array model, the
// x0 rule, and priority of the remap port over the write-back port.
module tb_param_regfile;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [4:0] rs1, rs2, rd, remap_idx;
  logic [31:0] rdata1, rdata2, wdata, remap_rdata, remap_wdata;
  logic we, remap_we;
  logic [31:0] model [32];
  param_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1; remap_we = 0; remap_idx = 0; remap_wdata = 0;
    for (int i = 0; i < 32; i++) begin
      rd = 5'(i); wdata = $urandom; model[i] = wdata; @(negedge clk);
    end
    for (int n = 0; n < 600; n++) begin
      we = $urandom % 2; rd = $urandom; wdata = $urandom;
      remap_we = ($urandom % 4) == 0; remap_idx = $urandom; remap_wdata = $urandom;
      rs1 = $urandom; rs2 = $urandom;
      #1;
      checks += 3;
      if (rs1 != 0 && rdata1 !== model[rs1]) begin failures++; $display("FAIL rd1 %0d", rs1); end
      if (rs2 != 0 && rdata2 !== model[rs2]) begin failures++; $display("FAIL rd2 %0d", rs2); end
      if (remap_idx != 0 && remap_rdata !== model[remap_idx]) begin failures++; $display("FAIL remap rd"); end
      @(negedge clk);
      if (remap_we && remap_idx != 0) model[remap_idx] = remap_wdata;
      else if (we && rd != 0) model[rd] = wdata;
    end
    // x0 keeps its (never written) initial contents: its value is not checked
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
