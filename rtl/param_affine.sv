// param_affine -- round function F(K, R) of the PARAM obfuscation network.
//
// Computes Y = A * (R || K) + C over GF(2): every output bit y_r is the parity
// of the 32-bit vector (K, R) masked by row r of the 16x32 affine matrix A,
// plus (XOR) bit r of the round constant C. Purely combinational.
//
// Interface: r (16-bit right half), k (16-bit round key), y (16-bit output).
// The parameter ROUND (0..3) selects the round constant.
//
// From the paper: the 32x16 affine structure, 16-bit inputs and output and
// the first-round matrix. Own choices: the bit ordering (x_0..x_15 = R[0..15],
// x_16..x_31 = K[0..15]), the use of the first-round matrix in every round and
// the values of the round constants (see param_pkg).
module param_affine
  import param_pkg::*;
#(
  parameter int unsigned ROUND = 0
) (
  input  logic [HALF_W-1:0] r,
  input  logic [HALF_W-1:0] k,
  output logic [HALF_W-1:0] y
);
  logic [31:0] x;
  assign x = {k, r};

  always_comb begin
    for (int i = 0; i < HALF_W; i++) begin
      y[i] = ^(AFFINE_ROW[i] & x) ^ ROUND_CONST[ROUND][i];
    end
  end
endmodule
