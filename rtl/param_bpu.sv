// param_bpu -- bimodal branch predictor with a coupled branch target buffer.
//
// Prediction (combinational, fetch stage): the PC indexes a table of 2-bit
// saturating counters and a direct-mapped BTB holding {valid, tag, target}.
// The fetch is predicted taken when the BTB hits and the counter is in one of
// its two taken states; the predicted next PC is then the BTB target.
//
// Update: the execute stage reports every resolved control-transfer
// instruction. Following the leakage fix of the paper, the BPU's input
// register is loaded with the resolved {pc, target, taken} only when the
// instruction in execute is a branch or jump (`upd_valid`); otherwise it is
// loaded with 0, so ALU results of other instructions never enter the BPU.
// The tables are written from that register one cycle later.
//
// From the paper: bimodal predictor with coupled BTB, gated update register
// (Fig. 7, Sec. IV-B). Own choices: table sizes, indexing, counter reset
// value (weakly not taken), direct-mapped BTB.
module param_bpu
  import param_pkg::*;
#(
  parameter int unsigned BHT_ENTRIES = 256,
  parameter int unsigned BTB_ENTRIES = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  // prediction
  input  logic [XLEN-1:0] pc,
  output logic            pred_taken,
  output logic [XLEN-1:0] pred_target,
  // update from execute
  input  logic            upd_valid,
  input  logic [XLEN-1:0] upd_pc,
  input  logic [XLEN-1:0] upd_target,
  input  logic            upd_taken
);
  localparam int unsigned BHT_W = $clog2(BHT_ENTRIES);
  localparam int unsigned BTB_W = $clog2(BTB_ENTRIES);
  localparam int unsigned TAG_W = XLEN - 2 - BTB_W;

  logic [1:0]       bht      [BHT_ENTRIES];
  logic             btb_v    [BTB_ENTRIES];
  logic [TAG_W-1:0] btb_tag  [BTB_ENTRIES];
  logic [XLEN-1:0]  btb_tgt  [BTB_ENTRIES];

  // gated update register
  logic            u_v, u_taken;
  logic [XLEN-1:0] u_pc, u_tgt;

  logic [BTB_W-1:0] p_bi;
  logic [BHT_W-1:0] p_hi;
  assign p_bi = pc[2 +: BTB_W];
  assign p_hi = pc[2 +: BHT_W];
  assign pred_taken  = btb_v[p_bi] && btb_tag[p_bi] == pc[XLEN-1 -: TAG_W] && bht[p_hi][1];
  assign pred_target = btb_tgt[p_bi];

  logic [BTB_W-1:0] u_bi;
  logic [BHT_W-1:0] u_hi;
  assign u_bi = u_pc[2 +: BTB_W];
  assign u_hi = u_pc[2 +: BHT_W];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      u_v <= 1'b0; u_taken <= 1'b0; u_pc <= '0; u_tgt <= '0;
      for (int i = 0; i < BHT_ENTRIES; i++) bht[i] <= 2'b01;
      for (int i = 0; i < BTB_ENTRIES; i++) btb_v[i] <= 1'b0;
    end else begin
      u_v     <= upd_valid;
      u_taken <= upd_valid ? upd_taken  : 1'b0;
      u_pc    <= upd_valid ? upd_pc     : '0;
      u_tgt   <= upd_valid ? upd_target : '0;
      if (u_v) begin
        if (u_taken && bht[u_hi] != 2'b11) bht[u_hi] <= bht[u_hi] + 2'b01;
        if (!u_taken && bht[u_hi] != 2'b00) bht[u_hi] <= bht[u_hi] - 2'b01;
        if (u_taken) begin
          btb_v[u_bi]   <= 1'b1;
          btb_tag[u_bi] <= u_pc[XLEN-1 -: TAG_W];
          btb_tgt[u_bi] <= u_tgt;
        end
      end
    end
  end
endmodule
