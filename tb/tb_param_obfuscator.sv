// tb_param_obfuscator -- checks O_k against the reference Feistel model,
// checks that the inverse mode undoes it for random words and keys, and
// that a key change changes the output.
module tb_param_obfuscator;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] x, y, z, y2;
  logic [63:0] key, key2;
  param_obfuscator u_f  (.din(x), .key(key),  .inverse(1'b0), .dout(y));
  param_obfuscator u_i  (.din(y), .key(key),  .inverse(1'b1), .dout(z));
  param_obfuscator u_f2 (.din(x), .key(key2), .inverse(1'b0), .dout(y2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int diff;
    diff = 0;
    for (int n = 0; n < 1000; n++) begin
      x = $urandom; key = {$urandom, $urandom}; key2 = key ^ (64'h1 << ($urandom % 64));
      #1;
      checks++;
      if (y !== ref_obf(x, key, 1'b0)) begin
        failures++; $display("FAIL fwd x=%h key=%h y=%h exp=%h", x, key, y, ref_obf(x, key, 1'b0));
      end
      checks++;
      if (z !== x) begin failures++; $display("FAIL inv x=%h z=%h", x, z); end
      checks++;
      if (ref_obf(y, key, 1'b1) !== x) begin failures++; $display("FAIL ref inv"); end
      if (y2 != y) diff++;
    end
    // a single key-bit flip must change the output for almost all words
    checks++;
    if (diff < 990) begin failures++; $display("FAIL key sensitivity %0d/1000", diff); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
