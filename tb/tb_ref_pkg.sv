// tb_ref_pkg -- independent reference models for the PARAM testbenches.
//
// The obfuscation reference is built from the affine matrix written as the
// text of its printed rows (column x0 first), parsed character by character,
// so it does not share the bit encoding used by the RTL. Round keys, round
// constants and the Feistel schedule (swap after rounds 1-3, none after round
// 4, inverse = reversed keys) follow the design description.
package tb_ref_pkg;

  localparam string ROWS [16] = '{
    "10000011110111111000111000110110",
    "01001110110000100001011100101010",
    "01100111010000000011100000010010",
    "01110010011001111101110110111011",
    "11111010111000101111000010110110",
    "00010010111001010110010111111111",
    "01010001001001001000010100011011",
    "01010010000101000001100111110000",
    "00010000010101011000011100011011",
    "01111100110111111000111100011000",
    "11100011101001101111001101001100",
    "00111010101111000001101101101111",
    "10001101000111011011001010001010",
    "10010100000110110010111110011101",
    "11101110000100100110111111111010",
    "01101110010100110111001111010110"
  };
  localparam logic [15:0] RC [4] = '{16'h5A3C, 16'hC3A5, 16'h9E37, 16'h7F4A};

  function automatic logic [15:0] ref_affine(input logic [15:0] r, input logic [15:0] k,
                                             input int round);
    logic [15:0] y;
    for (int i = 0; i < 16; i++) begin
      logic acc;
      acc = RC[round][i];
      for (int j = 0; j < 32; j++) begin
        logic xj;
        xj = (j < 16) ? r[j] : k[j-16];
        if (ROWS[i][j] == "1") acc ^= xj;
      end
      y[i] = acc;
    end
    return y;
  endfunction

  function automatic logic [31:0] ref_obf(input logic [31:0] x, input logic [63:0] key,
                                          input bit inverse);
    logic [15:0] l, r, t;
    int ki;
    l = x[31:16];
    r = x[15:0];
    for (int i = 0; i < 4; i++) begin
      ki = inverse ? 3 - i : i;
      t  = l ^ ref_affine(r, key[16*ki +: 16], ki);
      if (i < 3) begin l = r; r = t; end
      else       l = t;
    end
    return {l, r};
  endfunction

  // address obfuscation as seen by the data cache: O_k(a[31:6]) || a[5:0]
  function automatic logic [37:0] ref_addr(input logic [31:0] a, input logic [63:0] key);
    return {ref_obf({6'b0, a[31:6]}, key, 1'b0), a[5:0]};
  endfunction

endpackage
