// tb_param_core -- the pipeline alone, with behavioural caches around it.
//
// The instruction side answers from a program array and misses at random.
// The data side keeps plain words: it recovers the plain address from the
// obfuscated one the core sends (O_k^-1 of bits 37:6), answers loads with
// O_k(word) and stores O_k^-1(written word), and also stalls at random. So
// the test passes only if the core obfuscates addresses and data exactly as
// the reference model does. The test program (SubBytes loop, mul/div,
// sub-word accesses, JAL/JALR, array loops) must leave the expected results
// in memory; the remap hold input is pulsed during the run and the core must
// drain and keep its state. Counts forwarding, stalls and mispredictions.
module tb_param_core;
  import param_pkg::*;
  import tb_ref_pkg::*;
  import tb_prog_pkg::*;
  int checks = 0, failures = 0;
  localparam int NP = 64, BIG = 1024, SEED = 3;
  localparam logic [63:0] KEY = 64'hFEDC_BA98_7654_3210;
  logic clk = 0, rst_n = 0;
  logic [63:0] key;
  logic ic_req, ic_hit, dc_req_valid, dc_req_we, dc_ready, hold, idle, halted;
  logic [31:0] ic_pc, ic_instr, dc_req_wdata, dc_rdata;
  logic [37:0] dc_req_addr;
  logic [4:0] rf_remap_idx;
  logic [31:0] rf_remap_rdata, rf_remap_wdata, prf_remap_rdata, prf_remap_wdata;
  logic rf_remap_we, prf_remap_idx, prf_remap_we;
  logic ev_retire, ev_mispredict, ev_load_use, ev_dc_stall, ev_md_stall, ev_fwd_ex, ev_fwd_prf;
  param_core dut (.*);
  always #5 clk = ~clk;

  logic [31:0] prog [$];
  logic [31:0] dmem [16384];
  int jal_addr;

  // behavioural instruction side
  logic ic_miss_now;
  always @(posedge clk) ic_miss_now <= ($urandom % 6) == 0;
  assign ic_hit   = !ic_miss_now;
  assign ic_instr = (ic_pc / 4 < prog.size()) ? prog[ic_pc / 4] : 32'h0000_0013;

  // behavioural data side
  logic        dc_slow;
  logic [31:0] d_plain_addr;
  always @(posedge clk) dc_slow <= ($urandom % 5) == 0;
  assign d_plain_addr = {ref_obf(dc_req_addr[37:6], key, 1)[25:0], dc_req_addr[5:0]};
  assign dc_ready = dc_req_valid && !dc_slow;
  assign dc_rdata = ref_obf(dmem[d_plain_addr[15:2]], key, 0);
  always @(posedge clk) if (dc_req_valid && dc_ready && dc_req_we)
    dmem[d_plain_addr[15:2]] <= ref_obf(dc_req_wdata, key, 1);

  int n_mis, n_lu, n_dcs, n_mds, n_fex, n_fprf, n_ret, n_hold;
  always @(posedge clk) if (rst_n) begin
    n_mis += ev_mispredict; n_lu += ev_load_use; n_dcs += ev_dc_stall; n_mds += ev_md_stall;
    n_fex += ev_fwd_ex; n_fprf += ev_fwd_prf; n_ret += ev_retire;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r [11];
    logic [7:0]  outb [$];
    key = KEY; hold = 0;
    rf_remap_idx = 0; rf_remap_we = 0; rf_remap_wdata = 0;
    prf_remap_idx = 0; prf_remap_we = 0; prf_remap_wdata = 0;
    n_mis = 0; n_lu = 0; n_dcs = 0; n_mds = 0; n_fex = 0; n_fprf = 0; n_ret = 0; n_hold = 0;
    build(prog, NP, BIG, jal_addr);
    expected(NP, BIG, SEED, jal_addr, r, outb);
    for (int i = 0; i < 16384; i++) dmem[i] = 0;
    for (int i = 0; i < 256; i++) dmem[(S_BASE + i) / 4][8 * (i % 4) +: 8] = sbox(i);
    for (int i = 0; i < NP; i++)  dmem[(P_BASE + i) / 4][8 * (i % 4) +: 8] = pbyte(i, SEED);
    for (int i = 0; i < 16; i++)  dmem[(K_BASE + i) / 4][8 * (i % 4) +: 8] = kbyte(i, SEED);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // pulse the remap hold a few times while the program runs
    fork
      repeat (5) begin
        int c;
        repeat (700 + $urandom % 500) @(negedge clk);
        hold = 1;
        c = 0;
        while (!idle && c < 100) begin @(negedge clk); c++; end
        checks++;
        if (!idle) begin failures++; $display("FAIL core did not drain"); end
        n_hold++;
        repeat (5) @(negedge clk);
        hold = 0;
      end
    join_none
    while (!halted) @(negedge clk);
    for (int i = 0; i < 11; i++) begin
      checks++;
      if (dmem[(R_BASE / 4) + i] !== r[i]) begin
        failures++; $display("FAIL r%0d = %h exp %h", i, dmem[(R_BASE / 4) + i], r[i]);
      end
    end
    for (int i = 0; i < NP; i++) begin
      checks++;
      if (dmem[(O_BASE + i) / 4][8 * (i % 4) +: 8] !== outb[i]) begin
        failures++; $display("FAIL out[%0d]", i);
      end
    end
    for (int j = 0; j < BIG; j++) begin
      checks++;
      if (dmem[B_BASE / 4 + j] !== 3 * j + 1) begin failures++; $display("FAIL big[%0d]", j); end
    end
    $display("core: retired=%0d mispredicts=%0d load_use=%0d dc_stall=%0d md_stall=%0d fwd_ex=%0d fwd_prf=%0d holds=%0d",
             n_ret, n_mis, n_lu, n_dcs, n_mds, n_fex, n_fprf, n_hold);
    checks += 7;
    if (n_mis == 0)  begin failures++; $display("FAIL no mispredict"); end
    if (n_lu == 0)   begin failures++; $display("FAIL no load-use stall"); end
    if (n_dcs == 0)  begin failures++; $display("FAIL no data stall"); end
    if (n_mds == 0)  begin failures++; $display("FAIL no mul/div stall"); end
    if (n_fex == 0)  begin failures++; $display("FAIL no EX forwarding"); end
    if (n_fprf == 0) begin failures++; $display("FAIL no PRF forwarding"); end
    if (n_hold == 0) begin failures++; $display("FAIL no hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
