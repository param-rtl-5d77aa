// tb_param_remap_unit -- the remapping unit against a register-file array,
// two PRF words, a pipeline that takes some cycles to drain and a data cache
// whose flush takes some cycles. Checks the order of the steps (no flush
// before the pipeline is idle, no remap before the flush is done), that
// every entry becomes O_new(O_old^-1(old)) so that its plain value is kept,
// that the new key is the LFSR value seen at the request, that hold is
// released afterwards, the cycle count of the remap, and that a request
// arriving during a key change is served afterwards.
module tb_param_remap_unit;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic key_change_req, busy, core_hold, core_idle, dc_flush, dc_flush_done;
  logic [63:0] lfsr_state, key;
  logic [4:0] rf_idx;
  logic [31:0] rf_rdata, rf_wdata, prf_rdata, prf_wdata;
  logic rf_we, prf_idx, prf_we;
  logic [15:0] remap_count;
  localparam logic [63:0] K0 = 64'h0F1E_2D3C_4B5A_6978;
  param_remap_unit #(.INIT_KEY(K0)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] rf [32], prf [2], plain_rf [32], plain_prf [2];
  assign rf_rdata  = rf[rf_idx];
  assign prf_rdata = prf[prf_idx];
  always @(posedge clk) begin
    if (rf_we) rf[rf_idx] <= rf_wdata;
    if (prf_we) prf[prf_idx] <= prf_wdata;
    lfsr_state <= lfsr_state * 64'd6364136223846793005 + 64'd1442695040888963407;
  end

  int drain_left, flush_left, flushes, order_err;
  bit flushed;
  always @(posedge clk) begin
    if (drain_left > 0) drain_left <= drain_left - 1;
    dc_flush_done <= 0;
    if (dc_flush && rst_n) begin flushes++; flush_left <= 20; flushed <= 0; if (!core_idle) order_err++; end
    else if (flush_left > 1) flush_left <= flush_left - 1;
    else if (flush_left == 1) begin flush_left <= 0; dc_flush_done <= 1; flushed <= 1; end
    if ((rf_we || prf_we) && !flushed) order_err++;
  end
  assign core_idle = core_hold && drain_left == 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic change_key(input bit second_req);
    logic [63:0] k_old, k_new;
    int cyc;
    k_old = key;
    drain_left = 5;
    @(negedge clk);
    key_change_req = 1;
    #1 k_new = lfsr_state;
    @(negedge clk);
    key_change_req = 0;
    cyc = 1;
    if (second_req) begin @(negedge clk); key_change_req = 1; @(negedge clk); key_change_req = 0; cyc += 2; end
    while (busy && cyc < 1000) begin @(negedge clk); cyc++; end
    checks++;
    if (key !== k_new) begin failures++; $display("FAIL new key %h exp %h", key, k_new); end
    // capture, 5 drain, flush pulse + 20 + 1, 31 RF, 2 PRF, commit
    checks++;
    if (cyc < 60 || cyc > 64) begin failures++; $display("FAIL remap time %0d", cyc); end
    for (int i = 1; i < 32; i++) begin
      checks++;
      if (ref_obf(rf[i], key, 1) !== plain_rf[i]) begin failures++; $display("FAIL rf[%0d]", i); end
    end
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (ref_obf(prf[i], key, 1) !== plain_prf[i]) begin failures++; $display("FAIL prf[%0d]", i); end
    end
    checks++;
    if (core_hold) begin failures++; $display("FAIL hold not released"); end
  endtask

  initial begin
    key_change_req = 0; lfsr_state = 64'h1; drain_left = 0; flush_left = 0; flushes = 0;
    order_err = 0; flushed = 0; dc_flush_done = 0;
    for (int i = 0; i < 32; i++) begin plain_rf[i] = $urandom; rf[i] = ref_obf(plain_rf[i], K0, 0); end
    for (int i = 0; i < 2; i++)  begin plain_prf[i] = $urandom; prf[i] = ref_obf(plain_prf[i], K0, 0); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (key !== K0 || core_hold) begin failures++; $display("FAIL reset state"); end
    change_key(0);
    change_key(1);
    // the request made during the second change starts a third one
    @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("FAIL pending request lost"); end
    while (busy) @(negedge clk);
    checks += 2;
    if (remap_count != 3) begin failures++; $display("FAIL count %0d", remap_count); end
    if (order_err != 0 || flushes != 3) begin failures++; $display("FAIL step order %0d %0d", order_err, flushes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
