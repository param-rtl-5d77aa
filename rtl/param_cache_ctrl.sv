// param_cache_ctrl -- cache controller: shares the memory bus between the
// instruction cache and the data cache.
//
// Each cache issues single-word requests (valid/ready) and waits for the
// response. The controller grants the bus to one client per request and holds
// the grant until that request's response has returned; when both request in
// the same cycle the data cache wins. Requests carry plain addresses and data:
// the data cache removes the obfuscation before a write-back and applies it
// after a refill, so nothing obfuscated leaves the processor.
//
// Bus port: bus_req_valid/bus_req_ready, then bus_resp_valid with read data
// (also returned, as an acknowledgement, for writes).
//
// From the paper: a cache controller between both caches and the bus fabric
// (Fig. 8). Own choices: the simple word-request bus instead of the
// AXI4/TileLink fabric of the baseline SoC, fixed priority, one outstanding
// request.
module param_cache_ctrl
  import param_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // instruction cache
  input  logic            i_req_valid,
  input  mem_req_t        i_req,
  output logic            i_req_ready,
  output logic            i_resp_valid,
  // data cache
  input  logic            d_req_valid,
  input  mem_req_t        d_req,
  output logic            d_req_ready,
  output logic            d_resp_valid,
  // shared response data
  output logic [XLEN-1:0] resp_rdata,
  // bus
  output logic            bus_req_valid,
  output mem_req_t        bus_req,
  input  logic            bus_req_ready,
  input  logic            bus_resp_valid,
  input  logic [XLEN-1:0] bus_resp_rdata
);
  typedef enum logic [1:0] { G_NONE, G_I, G_D } grant_e;
  grant_e busy;      // owner of the outstanding request
  grant_e sel;       // owner of this cycle's request

  always_comb begin
    sel = G_NONE;
    if (busy == G_NONE) begin
      if (d_req_valid)      sel = G_D;
      else if (i_req_valid) sel = G_I;
    end
  end

  assign bus_req_valid = (sel != G_NONE);
  assign bus_req       = (sel == G_D) ? d_req : i_req;
  assign d_req_ready   = (sel == G_D) && bus_req_ready;
  assign i_req_ready   = (sel == G_I) && bus_req_ready;

  assign d_resp_valid = (busy == G_D) && bus_resp_valid;
  assign i_resp_valid = (busy == G_I) && bus_resp_valid;
  assign resp_rdata   = bus_resp_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n)                          busy <= G_NONE;
    else if (busy != G_NONE)             begin if (bus_resp_valid) busy <= G_NONE; end
    else if (bus_req_valid && bus_req_ready) busy <= sel;
  end

  // a response never arrives without an outstanding request
  a_no_spurious_resp: assert property (@(posedge clk) disable iff (!rst_n)
                                       bus_resp_valid |-> busy != G_NONE);
endmodule
