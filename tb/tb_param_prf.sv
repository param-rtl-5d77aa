// tb_param_prf -- drives random advance/hold sequences into the PRF and checks
// lookups against a two-slot model (youngest match wins, readiness of loads,
// x0 never matches), plus the remap port.
module tb_param_prf;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic advance, hold, in0_valid, in0_ready, remap_idx, remap_we;
  logic [4:0] in0_rd;
  logic [31:0] in0_data, in1_data, remap_rdata, remap_wdata;
  logic [4:0] q_rs [2];
  logic q_hit [2], q_ready [2];
  logic [31:0] q_data [2];
  param_prf dut (.*);
  always #5 clk = ~clk;

  typedef struct { bit v; bit r; logic [4:0] rd; logic [31:0] d; } s_t;
  s_t m [2];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    advance = 0; hold = 0; in0_valid = 0; in0_ready = 0; in0_rd = 0; in0_data = 0; in1_data = 0;
    remap_idx = 0; remap_we = 0; remap_wdata = 0; q_rs[0] = 0; q_rs[1] = 0;
    m[0] = '{0, 0, 0, 0}; m[1] = '{0, 0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 800; n++) begin
      advance = ($urandom % 4) != 0; hold = !advance && ($urandom % 2);
      in0_valid = $urandom % 2; in0_ready = $urandom % 2; in0_rd = $urandom % 4;
      in0_data = $urandom; in1_data = $urandom;
      remap_we = ($urandom % 8) == 0; remap_idx = $urandom; remap_wdata = $urandom;
      for (int q = 0; q < 2; q++) q_rs[q] = $urandom % 4;
      #1;
      for (int q = 0; q < 2; q++) begin
        bit eh, er; logic [31:0] ed;
        eh = 0; er = 0; ed = 0;
        for (int s = 1; s >= 0; s--)
          if (m[s].v && m[s].rd == q_rs[q] && q_rs[q] != 0) begin eh = 1; er = m[s].r; ed = m[s].d; end
        checks++;
        if (q_hit[q] !== eh || (eh && (q_ready[q] !== er || q_data[q] !== ed))) begin
          failures++; $display("FAIL lookup %0d rs=%0d hit=%b exp=%b", n, q_rs[q], q_hit[q], eh);
        end
      end
      checks++;
      if (remap_rdata !== m[remap_idx].d) begin failures++; $display("FAIL remap read"); end
      @(negedge clk);
      if (remap_we) m[remap_idx].d = remap_wdata;
      else if (hold) m[1] = '{0, 0, 0, 0};
      else if (advance) begin
        m[1] = '{m[0].v, 1, m[0].rd, in1_data};
        m[0] = '{in0_valid, in0_ready, in0_rd, in0_data};
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
