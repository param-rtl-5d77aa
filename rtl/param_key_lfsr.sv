// param_key_lfsr -- free-running key generator of the remapping unit.
//
// A 64-bit Fibonacci LFSR with the maximal-length feedback taps 64, 63, 61
// and 60. It advances one step every clock cycle from reset, so the value
// that the remapping unit captures on a key change request depends on the
// time of the request. The 64-bit state is used directly as the four 16-bit
// round keys.
//
// Interface: clk, rst_n (active-low synchronous reset to SEED), state.
//
// From the paper: keys come from an LFSR inside the processor and are never
// visible to software. Own choices: width, taps, seed and free-running
// stepping (the paper gives none of them).
module param_key_lfsr
  import param_pkg::*;
#(
  parameter logic [KEY_W-1:0] SEED = 64'hACE1_2468_BDF0_1357
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [KEY_W-1:0] state
);
  logic fb;
  assign fb = state[63] ^ state[62] ^ state[60] ^ state[59];

  always_ff @(posedge clk) begin
    if (!rst_n) state <= SEED;
    else        state <= {state[62:0], fb};
  end
endmodule
