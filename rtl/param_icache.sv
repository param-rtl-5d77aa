// param_icache -- instruction cache of PARAM (not obfuscated).
//
// Direct-mapped, 16 KB: 256 lines of 64 bytes. The fetch stage presents the
// PC every cycle; `hit` and `instr` are combinational (asynchronous array
// read). On a miss the cache fetches the 16 words of the line one at a time
// through its memory port, writes the line and then hits.
//
// Memory port: req_valid/req_ready handshake for one word request
// (mem_req_t, always a read here), then resp_valid with the data. At most one
// request is outstanding.
//
// From the paper: 16 KB instruction cache, 64-byte lines, misses served by the
// cache controller; instruction-side structures are not obfuscated. Own
// choices: direct mapping, word-by-word refill, no prefetch.
module param_icache
  import param_pkg::*;
#(
  parameter int unsigned LINES = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req,
  input  logic [XLEN-1:0] pc,
  output logic            hit,
  output logic [XLEN-1:0] instr,
  // memory port
  output logic            mreq_valid,
  output mem_req_t        mreq,
  input  logic            mreq_ready,
  input  logic            mresp_valid,
  input  logic [XLEN-1:0] mresp_rdata
);
  localparam int unsigned IDX_W = $clog2(LINES);
  localparam int unsigned TAG_W = XLEN - OFFSET_W - IDX_W;
  typedef logic [LINE_WORDS-1:0][XLEN-1:0] line_t;

  logic             valid [LINES];
  logic [TAG_W-1:0] tags  [LINES];
  line_t            data  [LINES];

  logic [IDX_W-1:0] idx;
  logic [TAG_W-1:0] tag;
  assign idx = pc[OFFSET_W +: IDX_W];
  assign tag = pc[XLEN-1 -: TAG_W];

  typedef enum logic [1:0] { S_IDLE, S_REQ, S_WAIT } state_e;
  state_e           state;
  logic [3:0]       cnt;
  logic [XLEN-1:0]  miss_pc;
  line_t            fill;

  assign hit   = (state == S_IDLE) && valid[idx] && tags[idx] == tag;
  assign instr = data[idx][pc[5:2]];

  assign mreq_valid = (state == S_REQ);
  assign mreq.we    = 1'b0;
  assign mreq.addr  = {miss_pc[XLEN-1:OFFSET_W], cnt, 2'b00};
  assign mreq.wdata = '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      miss_pc <= '0;
      for (int i = 0; i < LINES; i++) valid[i] <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (req && !hit) begin
          miss_pc <= pc;
          cnt     <= '0;
          state   <= S_REQ;
        end
        S_REQ: if (mreq_ready) state <= S_WAIT;
        S_WAIT: if (mresp_valid) begin
          fill[cnt] <= mresp_rdata;
          cnt <= cnt + 4'd1;
          if (cnt == 4'(LINE_WORDS - 1)) begin
            valid[miss_pc[OFFSET_W +: IDX_W]] <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Line and tag arrays: no reset, so that they map onto RAM.
  logic fill_last;
  assign fill_last = rst_n && state == S_WAIT && mresp_valid && cnt == 4'(LINE_WORDS - 1);
  always_ff @(posedge clk) begin
    if (fill_last) begin
      data[miss_pc[OFFSET_W +: IDX_W]] <= {mresp_rdata, fill[LINE_WORDS-2:0]};
      tags[miss_pc[OFFSET_W +: IDX_W]] <= miss_pc[XLEN-1 -: TAG_W];
    end
  end
endmodule
