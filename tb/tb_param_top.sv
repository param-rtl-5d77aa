// tb_param_top -- end-to-end test of the whole processor at its default
// sizes (16 KB caches), with the behavioural memory on the bus port.
//
// The test program (table-based AES SubBytes over 256 bytes, mul/div,
// sub-word accesses, JAL/JALR, then writing and summing a 32 KB array, twice
// the data cache) is loaded into memory. A key change is requested while the
// program runs; when it has halted, a second key change writes every dirty
// line back. Memory must then hold the expected results, computed
// independently. The register file must hold the sum obfuscated under the
// final key. Each mechanism of the design must have occurred at least once:
// misprediction flush, load-use stall, data-cache stall, mul/div stall,
// forwarding from execute and from the PRF, data-cache miss, dirty
// write-back, hit-buffer hit, line-buffer hit, key change (remap) and a
// load served early with the critical word of its refill.
module tb_param_top;
  import param_pkg::*;
  import tb_ref_pkg::*;
  import tb_prog_pkg::*;
  int checks = 0, failures = 0;
  localparam int NP = 256, BIG = 8192, SEED = 11;
  logic clk = 0, rst_n = 0, key_change_req = 0;
  logic bus_req_valid, bus_req_ready, bus_resp_valid, halted, remap_busy;
  mem_req_t bus_req;
  logic [31:0] bus_resp_rdata;
  logic [15:0] remap_count;
  logic ev_retire, ev_mispredict, ev_load_use, ev_dc_stall, ev_md_stall, ev_fwd_ex, ev_fwd_prf;
  logic ev_dc_miss, ev_dc_writeback;
  param_top dut (.*);
  param_mem_model #(.WORDS(16384), .LATENCY(2)) mem (.*);
  always #5 clk = ~clk;

  logic [31:0] prog [$];
  int jal_addr;
  int n [13];
  int remap_cycles = 0;
  localparam string NAMES [13] = '{"retire", "mispredict", "load_use", "dc_stall", "md_stall",
    "fwd_ex", "fwd_prf", "dc_miss", "dc_writeback", "hb_hit", "lb_hit", "remap", "crit_word"};
  always @(posedge clk) if (rst_n) begin
    n[0] += ev_retire; n[1] += ev_mispredict; n[2] += ev_load_use; n[3] += ev_dc_stall;
    n[4] += ev_md_stall; n[5] += ev_fwd_ex; n[6] += ev_fwd_prf; n[7] += ev_dc_miss;
    n[8] += ev_dc_writeback;
    n[9]  += (dut.u_dcache.ready && dut.u_dcache.hb_hit);
    n[10] += (dut.u_dcache.ready && dut.u_dcache.lb_hit && !dut.u_dcache.hb_hit);
    n[12] += dut.u_dcache.crit_ready;
    remap_cycles += remap_busy;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic request_key_change();
    @(negedge clk); key_change_req = 1;
    @(negedge clk); key_change_req = 0;
    @(negedge clk);
    while (remap_busy) @(negedge clk);
  endtask

  initial begin
    logic [31:0] r [11];
    logic [7:0]  outb [$];
    logic [63:0] k0;
    int cyc;
    for (int i = 0; i < 13; i++) n[i] = 0;
    build(prog, NP, BIG, jal_addr);
    expected(NP, BIG, SEED, jal_addr, r, outb);
    for (int i = 0; i < 16384; i++) mem.mem[i] = 0;
    foreach (prog[i]) mem.mem[i] = prog[i];
    for (int i = 0; i < 256; i++) mem.mem[(S_BASE + i) / 4][8 * (i % 4) +: 8] = sbox(i);
    for (int i = 0; i < NP; i++)  mem.mem[(P_BASE + i) / 4][8 * (i % 4) +: 8] = pbyte(i, SEED);
    for (int i = 0; i < 16; i++)  mem.mem[(K_BASE + i) / 4][8 * (i % 4) +: 8] = kbyte(i, SEED);
    repeat (3) @(negedge clk);
    rst_n = 1;
    k0 = dut.key;
    // key change in the middle of the SubBytes loop
    while (n[0] < 1500) @(negedge clk);
    request_key_change();
    checks++;
    if (dut.key === k0) begin failures++; $display("FAIL key unchanged"); end
    cyc = 0;
    while (!halted) @(negedge clk);
    // second key change: flushes the data cache to memory
    request_key_change();
    n[11] = remap_count;
    for (int i = 0; i < 11; i++) begin
      checks++;
      if (mem.mem[(R_BASE / 4) + i] !== r[i]) begin
        failures++; $display("FAIL r%0d = %h exp %h", i, mem.mem[(R_BASE / 4) + i], r[i]);
      end
    end
    for (int i = 0; i < NP; i++) begin
      checks++;
      if (mem.mem[(O_BASE + i) / 4][8 * (i % 4) +: 8] !== outb[i]) begin
        failures++; $display("FAIL out[%0d]", i);
      end
    end
    for (int j = 0; j < BIG; j++) begin
      checks++;
      if (mem.mem[B_BASE / 4 + j] !== 3 * j + 1) begin
        failures++; if (failures < 10) $display("FAIL big[%0d]", j);
      end
    end
    // the register file holds the final sum only in obfuscated form
    checks++;
    if (dut.u_core.u_rf.regs[16] !== ref_obf(r[8], dut.key, 0) || dut.u_core.u_rf.regs[16] == r[8]) begin
      failures++; $display("FAIL register file contents not obfuscated under the current key");
    end
    for (int i = 0; i < 13; i++) begin
      $display("event %-12s %0d", NAMES[i], n[i]);
      checks++;
      if (n[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", NAMES[i]); end
    end
    checks++;
    if (remap_count != 2) begin failures++; $display("FAIL remap count"); end
    $display("memory reads=%0d writes=%0d", mem.reads, mem.writes);
    $display("cycles spent in key changes: %0d for %0d changes", remap_cycles, remap_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
