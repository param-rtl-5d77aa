// tb_param_key_lfsr -- compares the LFSR with a bit-serial model for 2000
// cycles after reset and checks it never repeats its seed in that time.
module tb_param_key_lfsr;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [63:0] state, model;
  localparam logic [63:0] SEED = 64'h0123_4567_89AB_CDEF;
  param_key_lfsr #(.SEED(SEED)) dut (.clk, .rst_n, .state);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    model = SEED;
    checks++; if (state !== SEED) begin failures++; $display("FAIL seed"); end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      model = {model[62:0], model[63] ^ model[62] ^ model[60] ^ model[59]};
      checks++;
      if (state !== model) begin failures++; $display("FAIL step %0d %h %h", n, state, model); end
      if (state == SEED) begin failures++; $display("FAIL seed repeats"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
