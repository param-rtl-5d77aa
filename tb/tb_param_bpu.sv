// tb_param_bpu -- trains branches and checks the bimodal counters and the
// BTB: a branch becomes predicted taken after one taken outcome from the
// weakly-not-taken reset state, keeps its target, and becomes not taken after
// two not-taken outcomes; an unknown PC is never predicted taken. Also checks
// that the update register stays 0 when no control-transfer instruction is
// reported (leakage fix).
module tb_param_bpu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [31:0] pc, pred_target, upd_pc, upd_target;
  logic pred_taken, upd_valid, upd_taken;
  param_bpu #(.BHT_ENTRIES(64), .BTB_ENTRIES(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic update(input logic [31:0] p, input logic [31:0] t, input logic tk);
    @(negedge clk); upd_valid = 1; upd_pc = p; upd_target = t; upd_taken = tk;
    @(negedge clk); upd_valid = 0; upd_pc = 32'hDEAD_BEEF; upd_target = 32'h1234_5678; upd_taken = 1;
    @(negedge clk);
  endtask

  task automatic expect_pred(input logic [31:0] p, input logic tk, input logic [31:0] t);
    pc = p; #1;
    checks++;
    if (pred_taken !== tk || (tk && pred_target !== t)) begin
      failures++; $display("FAIL pc=%h taken=%b exp %b target=%h exp %h", p, pred_taken, tk, pred_target, t);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    upd_valid = 0; upd_pc = 0; upd_target = 0; upd_taken = 0; pc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      logic [31:0] p, t;
      p = ({$urandom} & 32'h0000_FF00) | (n << 2); t = {$urandom} & 32'h0000_FFFC;  // distinct counters
      expect_pred(p ^ 32'h0010_0000, 1'b0, 0);      // never trained
      update(p, t, 1'b1);
      expect_pred(p, 1'b1, t);
      checks++;
      if (dut.u_pc !== 0 || dut.u_tgt !== 0 || dut.u_taken !== 0) begin
        failures++; $display("FAIL update register not gated");
      end
      update(p, t, 1'b1);                            // strongly taken
      update(p, t, 1'b0);
      expect_pred(p, 1'b1, t);                       // weakly taken
      update(p, t, 1'b0);
      expect_pred(p, 1'b0, t);                       // weakly not taken
      update(p, t, 1'b0);                            // back to strongly not taken
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
