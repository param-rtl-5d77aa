// tb_param_cache_ctrl -- two clients issue random single-word requests to the
// controller in front of the memory model; each client must get exactly its
// own responses with the right data, the data cache must win simultaneous
// requests, and memory must see every write.
module tb_param_cache_ctrl;
  import param_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic i_req_valid, i_req_ready, i_resp_valid, d_req_valid, d_req_ready, d_resp_valid;
  mem_req_t i_req, d_req, bus_req;
  logic [31:0] resp_rdata, bus_resp_rdata;
  logic bus_req_valid, bus_req_ready, bus_resp_valid;
  param_cache_ctrl dut (.*);
  param_mem_model #(.WORDS(1024), .LATENCY(3)) mem (.*);
  always #5 clk = ~clk;

  logic [31:0] model [1024];
  int i_done, d_done, both, d_first;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // instruction-side client: reads only
  initial begin
    i_req_valid = 0; i_req = '0; i_done = 0;
    wait (rst_n);
    repeat (300) begin
      @(negedge clk);
      i_req = '{we: 0, addr: ($urandom % 1024) * 4, wdata: 0};
      i_req_valid = 1;
      if (d_req_valid) both++;
      do @(posedge clk); while (!i_req_ready);
      #1 i_req_valid = 0;
      do @(posedge clk); while (!i_resp_valid);
      checks++;
      if (resp_rdata !== model[i_req.addr >> 2]) begin failures++; $display("FAIL i data"); end
      i_done++;
    end
  end

  // data-side client: reads and writes
  initial begin
    d_req_valid = 0; d_req = '0; d_done = 0; both = 0; d_first = 0;
    for (int k = 0; k < 1024; k++) begin model[k] = k * 7; mem.mem[k] = k * 7; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (300) begin
      @(negedge clk);
      d_req = '{we: $urandom % 2, addr: ($urandom % 1024) * 4, wdata: $urandom};
      d_req_valid = 1;
      #1;
      if (i_req_valid && dut.busy == 0) begin
        checks++; both++;
        if (!(bus_req_valid && bus_req == d_req)) begin failures++; $display("FAIL priority"); end
      end
      do @(posedge clk); while (!d_req_ready);
      #1 d_req_valid = 0;
      do @(posedge clk); while (!d_resp_valid);
      if (d_req.we) model[d_req.addr >> 2] = d_req.wdata;
      else begin
        checks++;
        if (resp_rdata !== model[d_req.addr >> 2]) begin failures++; $display("FAIL d data"); end
      end
      d_done++;
    end
    wait (i_done == 300);
    checks++;
    if (mem.writes + mem.reads != 600) begin failures++; $display("FAIL count"); end
    for (int k = 0; k < 1024; k++) begin
      checks++;
      if (mem.mem[k] !== model[k]) begin failures++; $display("FAIL mem %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
