// param_obfuscator -- the obfuscation function O_k and its inverse.
//
// A 4-round Feistel network on 32-bit words. The word is split into a left
// half L (bits 31:16) and a right half R (bits 15:0). Rounds 1 to 3 compute
// (L, R) <- (R, L ^ F(K_i, R)); the last round does not swap, so the output is
// (L ^ F(K_4, R), R). Because the final swap is undone, the inverse O_k^-1 is
// the same network with the round keys applied in reverse order, which is
// what the `inverse` input selects. Purely combinational; several copies are
// used across the processor wherever data or addresses cross between the
// plain and the obfuscated domain.
//
// Interface: din (32 bits), key (64 bits: round key K_i = key[16*i +: 16],
// i = 0 for the first round), inverse (0: obfuscate, 1: de-obfuscate), dout.
//
// From the paper: 4 rounds, 32-bit input split into 16-bit halves, one 16-bit
// key per round, L XOR F(K, R), swap between rounds, de-obfuscation by
// reversed keys. Own choices: which half is L, and the key bit layout.
module param_obfuscator
  import param_pkg::*;
(
  input  logic [XLEN-1:0]  din,
  input  logic [KEY_W-1:0] key,
  input  logic             inverse,
  output logic [XLEN-1:0]  dout
);
  logic [HALF_W-1:0] l   [ROUNDS+1];
  logic [HALF_W-1:0] r   [ROUNDS+1];
  logic [HALF_W-1:0] f   [ROUNDS];
  logic [HALF_W-1:0] rk  [ROUNDS];

  assign l[0] = din[31:16];
  assign r[0] = din[15:0];

  for (genvar i = 0; i < ROUNDS; i++) begin : g_round
    // Round i uses key i when obfuscating, key ROUNDS-1-i when de-obfuscating.
    // The round constant travels with its key so the inverse mirrors it.
    logic [HALF_W-1:0] f_fwd, f_inv;
    assign rk[i] = inverse ? key[HALF_W*(ROUNDS-1-i) +: HALF_W] : key[HALF_W*i +: HALF_W];
    param_affine #(.ROUND(i))            u_f_fwd (.r(r[i]), .k(rk[i]), .y(f_fwd));
    param_affine #(.ROUND(ROUNDS-1-i))   u_f_inv (.r(r[i]), .k(rk[i]), .y(f_inv));
    assign f[i] = inverse ? f_inv : f_fwd;
    if (i < ROUNDS - 1) begin : g_swap
      assign l[i+1] = r[i];
      assign r[i+1] = l[i] ^ f[i];
    end else begin : g_last
      assign l[i+1] = l[i] ^ f[i];
      assign r[i+1] = r[i];
    end
  end

  assign dout = {l[ROUNDS], r[ROUNDS]};
endmodule
