// tb_param_affine -- checks the round function against the reference built
// from the printed matrix rows, for each round constant, on random inputs and
// on unit vectors (which expose each matrix column).
module tb_param_affine;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0] r, k;
  logic [15:0] y [4];
  for (genvar g = 0; g < 4; g++) begin : g_r
    param_affine #(.ROUND(g)) dut (.r(r), .k(k), .y(y[g]));
  end

  task automatic check_all();
    #1;
    for (int g = 0; g < 4; g++) begin
      checks++;
      if (y[g] !== ref_affine(r, k, g)) begin
        failures++;
        $display("FAIL round %0d r=%h k=%h y=%h exp=%h", g, r, k, y[g], ref_affine(r, k, g));
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 32; b++) begin
      {k, r} = 32'h1 << b;
      check_all();
    end
    for (int n = 0; n < 500; n++) begin
      r = 16'($urandom); k = 16'($urandom);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
