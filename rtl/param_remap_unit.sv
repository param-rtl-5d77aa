// param_remap_unit -- re-keying of PARAM's obfuscation (the Remapping Unit).
//
// Holds the obfuscation key in use and replaces it on request. On a key change
// request it:
//   1. captures the new key from the key LFSR,
//   2. holds the pipeline's issue stage and waits until the pipeline is empty,
//   3. has the data cache write back its dirty lines (de-obfuscated with the
//      old key) and invalidate itself, since the address-to-set mapping of the
//      new key is different,
//   4. rewrites every register-file entry (x1..x31) and both PRF slots as
//      d'' = O_kn(O_ko^-1(d')), one entry per cycle,
//   5. installs the new key and releases the pipeline.
// A request that arrives while a change is in progress is remembered and
// served afterwards.
//
// Interface: key_change_req (pulse), lfsr_state (new key source), key (key
// in use), core_hold/core_idle, dc_flush/dc_flush_done, and a read/modify
// port each into the register file and the PRF. Timing: 1 cycle capture,
// drain, flush (depends on dirty lines), 31 + 2 remap cycles, 1 commit cycle.
//
// From the paper: a central remapping unit, key from an LFSR on a software
// request, Eq. 8 for stored data, invalidation with write-back of the whole
// data cache as the remapping of the cache (the paper's chosen option), data
// remap of RF and PRF. Own choices: draining the pipeline first, the order of
// the steps, one entry per cycle, the initial key (the LFSR seed).
module param_remap_unit
  import param_pkg::*;
#(
  parameter logic [KEY_W-1:0] INIT_KEY = 64'h0F1E_2D3C_4B5A_6978
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             key_change_req,
  input  logic [KEY_W-1:0] lfsr_state,
  output logic [KEY_W-1:0] key,
  output logic             busy,
  // pipeline
  output logic             core_hold,
  input  logic             core_idle,
  // data cache
  output logic             dc_flush,
  input  logic             dc_flush_done,
  // register file
  output logic [4:0]       rf_idx,
  input  logic [XLEN-1:0]  rf_rdata,
  output logic             rf_we,
  output logic [XLEN-1:0]  rf_wdata,
  // PRF
  output logic             prf_idx,
  input  logic [XLEN-1:0]  prf_rdata,
  output logic             prf_we,
  output logic [XLEN-1:0]  prf_wdata,
  // number of completed key changes
  output logic [15:0]      remap_count
);
  typedef enum logic [2:0] { S_IDLE, S_DRAIN, S_FLUSH, S_FLUSH_WAIT, S_RF, S_PRF, S_COMMIT } state_e;
  state_e state;

  logic [KEY_W-1:0] new_key;
  logic             pending;

  logic [XLEN-1:0] old_word, plain_word, new_word;
  assign old_word = (state == S_PRF) ? prf_rdata : rf_rdata;
  param_obfuscator u_deobf (.din(old_word),   .key(key),     .inverse(1'b1), .dout(plain_word));
  param_obfuscator u_obf   (.din(plain_word), .key(new_key), .inverse(1'b0), .dout(new_word));

  assign rf_we     = (state == S_RF);
  assign rf_wdata  = new_word;
  assign prf_we    = (state == S_PRF);
  assign prf_wdata = new_word;
  assign dc_flush  = (state == S_FLUSH);
  assign core_hold = (state != S_IDLE);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      key <= INIT_KEY;
      new_key <= '0;
      pending <= 1'b0;
      rf_idx <= 5'd1;
      prf_idx <= 1'b0;
      remap_count <= '0;
    end else begin
      if (key_change_req && state != S_IDLE) pending <= 1'b1;
      unique case (state)
        S_IDLE: if (key_change_req || pending) begin
          pending <= 1'b0;
          new_key <= lfsr_state;
          state   <= S_DRAIN;
        end
        S_DRAIN:      if (core_idle) state <= S_FLUSH;
        S_FLUSH:      state <= S_FLUSH_WAIT;
        S_FLUSH_WAIT: if (dc_flush_done) begin state <= S_RF; rf_idx <= 5'd1; end
        S_RF: begin
          rf_idx <= rf_idx + 5'd1;
          if (rf_idx == 5'd31) begin state <= S_PRF; prf_idx <= 1'b0; end
        end
        S_PRF: begin
          prf_idx <= 1'b1;
          if (prf_idx) state <= S_COMMIT;
        end
        S_COMMIT: begin
          key <= new_key;
          remap_count <= remap_count + 16'd1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
