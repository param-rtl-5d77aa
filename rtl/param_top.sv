// param_top -- PARAM: a RISC-V processor whose data path is obfuscated
// against power side-channel analysis.
//
// Instantiates the pipeline (with its register file, PRF, ALU, mul/div unit
// and branch predictor), the instruction cache, the obfuscated data cache
// with its line and hit buffers, the cache controller, the key LFSR and the
// remapping unit, wired as in the paper's block diagram:
//   core fetch  <-> instruction cache --\
//   core memory <-> data cache ----------+--> cache controller --> bus port
//   key_change_req --> remapping unit --> key (to core and data cache),
//                      hold/idle (core), flush (data cache), RF/PRF remap.
// A key change starts its flush only once the pipeline is empty and the
// data cache has no refill in progress (a load may have been served early).
// The key in use never leaves the processor; only plain addresses and data
// appear on the bus port.
//
// Bus port: one word per request; bus_req_valid/bus_req_ready, then
// bus_resp_valid with the read data (also pulsed to acknowledge a write).
// The memory behind it (the paper's off-chip RAM and bus fabric) is external.
// Status: halted (ECALL/EBREAK reached and pipeline empty), remap_busy,
// remap_count and one-cycle event strobes for the mechanisms of the design.
//
// From the paper: the set of blocks and their connections (Fig. 8), a key
// change request input to the remapping unit. Own choices: the bus port
// instead of the AXI4/TileLink fabric; the request is a pin, not a CSR.
module param_top
  import param_pkg::*;
#(
  parameter logic [XLEN-1:0]  RESET_PC = 32'h0000_0000,
  parameter logic [KEY_W-1:0] LFSR_SEED = 64'hACE1_2468_BDF0_1357,
  parameter logic [KEY_W-1:0] INIT_KEY  = 64'h0F1E_2D3C_4B5A_6978,
  parameter int unsigned      ICACHE_LINES = 256,
  parameter int unsigned      DCACHE_SETS  = 128,
  parameter int unsigned      DCACHE_WAYS  = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            key_change_req,
  // memory bus
  output logic            bus_req_valid,
  output mem_req_t        bus_req,
  input  logic            bus_req_ready,
  input  logic            bus_resp_valid,
  input  logic [XLEN-1:0] bus_resp_rdata,
  // status
  output logic            halted,
  output logic            remap_busy,
  output logic [15:0]     remap_count,
  output logic            ev_retire,
  output logic            ev_mispredict,
  output logic            ev_load_use,
  output logic            ev_dc_stall,
  output logic            ev_md_stall,
  output logic            ev_fwd_ex,
  output logic            ev_fwd_prf,
  output logic            ev_dc_miss,
  output logic            ev_dc_writeback
);
  logic [KEY_W-1:0] key, lfsr;

  // core <-> caches
  logic            ic_req, ic_hit;
  logic [XLEN-1:0] ic_pc, ic_instr;
  logic            dc_req_valid, dc_req_we, dc_ready;
  logic [37:0]     dc_req_addr;
  logic [XLEN-1:0] dc_req_wdata, dc_rdata;
  // remap
  logic            hold, idle, dc_flush, dc_flush_done, dc_busy;
  logic [4:0]      rf_idx;
  logic [XLEN-1:0] rf_rdata, rf_wdata, prf_rdata, prf_wdata;
  logic            rf_we, prf_idx, prf_we;
  // caches <-> controller
  logic            im_valid, im_ready, im_resp, dm_valid, dm_ready, dm_resp;
  mem_req_t        im_req, dm_req;
  logic [XLEN-1:0] m_rdata;

  param_core #(.RESET_PC(RESET_PC)) u_core (
    .clk, .rst_n, .key,
    .ic_req, .ic_pc, .ic_hit, .ic_instr,
    .dc_req_valid, .dc_req_we, .dc_req_addr, .dc_req_wdata, .dc_ready, .dc_rdata,
    .hold, .idle,
    .rf_remap_idx(rf_idx), .rf_remap_rdata(rf_rdata), .rf_remap_we(rf_we), .rf_remap_wdata(rf_wdata),
    .prf_remap_idx(prf_idx), .prf_remap_rdata(prf_rdata), .prf_remap_we(prf_we),
    .prf_remap_wdata(prf_wdata),
    .halted, .ev_retire, .ev_mispredict, .ev_load_use, .ev_dc_stall, .ev_md_stall,
    .ev_fwd_ex, .ev_fwd_prf
  );

  param_icache #(.LINES(ICACHE_LINES)) u_icache (
    .clk, .rst_n, .req(ic_req), .pc(ic_pc), .hit(ic_hit), .instr(ic_instr),
    .mreq_valid(im_valid), .mreq(im_req), .mreq_ready(im_ready),
    .mresp_valid(im_resp), .mresp_rdata(m_rdata)
  );

  param_dcache #(.SETS(DCACHE_SETS), .WAYS(DCACHE_WAYS)) u_dcache (
    .clk, .rst_n, .key,
    .req_valid(dc_req_valid), .req_we(dc_req_we), .req_addr(dc_req_addr),
    .req_wdata(dc_req_wdata), .ready(dc_ready), .rdata(dc_rdata),
    .flush(dc_flush), .flush_done(dc_flush_done),
    .mreq_valid(dm_valid), .mreq(dm_req), .mreq_ready(dm_ready),
    .mresp_valid(dm_resp), .mresp_rdata(m_rdata),
    .busy(dc_busy), .ev_miss(ev_dc_miss), .ev_writeback(ev_dc_writeback)
  );

  param_cache_ctrl u_ctrl (
    .clk, .rst_n,
    .i_req_valid(im_valid), .i_req(im_req), .i_req_ready(im_ready), .i_resp_valid(im_resp),
    .d_req_valid(dm_valid), .d_req(dm_req), .d_req_ready(dm_ready), .d_resp_valid(dm_resp),
    .resp_rdata(m_rdata),
    .bus_req_valid, .bus_req, .bus_req_ready, .bus_resp_valid, .bus_resp_rdata
  );

  param_key_lfsr #(.SEED(LFSR_SEED)) u_lfsr (.clk, .rst_n, .state(lfsr));

  param_remap_unit #(.INIT_KEY(INIT_KEY)) u_remap (
    .clk, .rst_n, .key_change_req, .lfsr_state(lfsr), .key, .busy(remap_busy),
    .core_hold(hold), .core_idle(idle && !dc_busy), .dc_flush, .dc_flush_done,
    .rf_idx, .rf_rdata, .rf_we, .rf_wdata,
    .prf_idx, .prf_rdata, .prf_we, .prf_wdata,
    .remap_count
  );
endmodule
