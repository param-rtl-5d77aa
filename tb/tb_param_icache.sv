// tb_param_icache -- instruction cache with the memory model behind it:
// fetches from random addresses must return the memory words; a line is
// fetched with 16 word reads on a miss and later fetches in the line hit.
// Checks the refill time (16 reads at 4 cycles each with a 2-cycle memory).
module tb_param_icache;
  import param_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic req, hit, mreq_valid, mreq_ready, mresp_valid;
  logic [31:0] pc, instr, mresp_rdata;
  mem_req_t mreq;
  param_icache #(.LINES(16)) dut (.*);
  param_mem_model #(.WORDS(4096), .LATENCY(2)) mem (
    .clk, .rst_n, .bus_req_valid(mreq_valid), .bus_req(mreq), .bus_req_ready(mreq_ready),
    .bus_resp_valid(mresp_valid), .bus_resp_rdata(mresp_rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, misses;
    misses = 0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = {i[15:0], 16'hA5A5} ^ 32'h1357_0000;
    req = 0; pc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      pc = ($urandom % 4096) * 4;
      if (n % 3 == 0) pc = (pc & ~32'h3F) | 32'h3C;   // last word of a line
      req = 1;
      cyc = 0;
      #1;
      if (!hit) misses++;
      while (!hit && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (instr !== mem.mem[pc >> 2]) begin failures++; $display("FAIL pc=%h %h", pc, instr); end
      if (cyc != 0) begin
        checks++;
        // miss detected, 16 x (request + 2 latency + response) , 1 cycle to return to idle
        if (cyc > 16 * 4 + 2 || cyc < 16 * 3) begin failures++; $display("FAIL refill time %0d", cyc); end
      end
      @(negedge clk);
    end
    checks++;
    if (mem.reads != misses * 16) begin failures++; $display("FAIL reads %0d misses %0d", mem.reads, misses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
