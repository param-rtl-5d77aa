// tb_param_dcache -- data cache (with its line and hit buffers) in front of
// the memory model. Random word loads and stores over a region four times
// the (reduced) cache size are sent with obfuscated addresses and data built
// by the reference model; every load must return O_k(plain word), memory must
// only ever receive plain data, and a flush must leave memory equal to the
// plain model and the cache empty. Also checks that hits are served from the
// hit buffer, that refills pass through the line buffer, and the miss time.
module tb_param_dcache;
  import param_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  localparam logic [63:0] KEY = 64'h3141_5926_5358_9793;
  localparam int REGION = 4096;            // words (16 KB)
  logic [63:0] key;
  logic req_valid, req_we, ready, flush, flush_done, mreq_valid, mreq_ready, mresp_valid;
  logic ev_miss, ev_writeback;
  logic [37:0] req_addr;
  logic [31:0] req_wdata, rdata, mresp_rdata;
  mem_req_t mreq;
  logic busy;
  param_dcache #(.SETS(16), .WAYS(2)) dut (.*);
  param_mem_model #(.WORDS(REGION), .LATENCY(2)) mem (
    .clk, .rst_n, .bus_req_valid(mreq_valid), .bus_req(mreq), .bus_req_ready(mreq_ready),
    .bus_resp_valid(mresp_valid), .bus_resp_rdata(mresp_rdata));
  always #5 clk = ~clk;

  logic [31:0] model [REGION];
  int hb_hits, lb_hits, misses, wbs;

  always @(posedge clk) if (rst_n) begin
    if (ready && dut.hb_hit) hb_hits++;
    if (ready && dut.lb_hit && !dut.hb_hit) lb_hits++;
    if (ev_miss && dut.state == 0) misses++;
    if (ev_writeback) wbs++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input int w, input bit we, input logic [31:0] data, output int cyc);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = ref_addr(w * 4, key); req_wdata = ref_obf(data, key, 0);
    cyc = 0;
    #1;
    while (!ready && cyc < 2000) begin @(negedge clk); cyc++; #1; end
    if (!we) begin
      checks++;
      if (rdata !== ref_obf(model[w], key, 0)) begin
        failures++; $display("FAIL load w=%0d got %h exp %h", w, rdata, ref_obf(model[w], key, 0));
      end
    end else model[w] = data;
    @(posedge clk);
    #1 req_valid = 0;
  endtask

  initial begin
    int cyc, addr;
    hb_hits = 0; lb_hits = 0; misses = 0; wbs = 0;
    key = KEY; req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0; flush = 0;
    for (int i = 0; i < REGION; i++) begin model[i] = i * 32'h9E37_79B9; mem.mem[i] = model[i]; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // first access: clean load miss, served when its critical word arrives
    access(5, 0, 0, cyc);
    checks++;
    if (cyc < 2 || cyc > 6) begin failures++; $display("FAIL critical word time %0d", cyc); end
    // the next access waits for the other 15 words (4 cycles each) and the install
    access(6, 0, 0, cyc);
    checks++;
    if (cyc < 15 * 4 - 6 || cyc > 15 * 4 + 4) begin failures++; $display("FAIL refill time %0d", cyc); end
    access(7, 0, 0, cyc);                 // same line: hit
    checks++;
    if (cyc != 0) begin failures++; $display("FAIL hit time %0d", cyc); end
    // a store miss is performed after the whole line is in
    access(5 + 16 * 64, 1, 32'h1234_5678, cyc);
    checks++;
    if (cyc < 16 * 4 || cyc > 16 * 4 + 4) begin failures++; $display("FAIL store miss time %0d", cyc); end
    for (int n = 0; n < 3000; n++) begin
      addr = (n % 4 == 0) ? ($urandom % REGION) : ((addr & ~15) | ($urandom % 16));
      access(addr, $urandom % 2, $urandom, cyc);
    end
    // flush: everything dirty goes back in plain form
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    cyc = 0;
    while (!flush_done && cyc < 500000) begin @(negedge clk); cyc++; end
    for (int i = 0; i < REGION; i++) begin
      checks++;
      if (mem.mem[i] !== model[i]) begin
        failures++;
        if (failures < 10) $display("FAIL mem[%0d]=%h exp %h", i, mem.mem[i], model[i]);
      end
    end
    for (int s = 0; s < 16; s++) for (int w = 0; w < 2; w++) begin
      checks++;
      if (dut.valid[w][s]) begin failures++; $display("FAIL line valid after flush"); end
    end
    // after the flush, with a new key, data must still be correct
    key = ~KEY;
    for (int n = 0; n < 300; n++) access($urandom % REGION, $urandom % 2, $urandom, cyc);
    checks += 3;
    if (hb_hits == 0) begin failures++; $display("FAIL no hit-buffer hits"); end
    if (lb_hits == 0) begin failures++; $display("FAIL no line-buffer hits"); end
    if (wbs == 0)     begin failures++; $display("FAIL no write-backs"); end
    $display("dcache: misses=%0d writebacks=%0d hb_hits=%0d lb_hits=%0d", misses, wbs, hb_hits, lb_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
