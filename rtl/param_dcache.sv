// param_dcache -- obfuscated data cache of PARAM, with line buffer and hit buffer.
//
// Write-back, write-allocate, 16 KB: 2 ways x 128 sets x 64-byte lines.
// Both its addresses and its data are obfuscated:
//  * The memory stage presents a' = O_k(tagsetindex(a)) || offset(a): the
//    26 tag+set bits of the byte address, zero-extended to 32 bits, pass
//    through the obfuscation function, the 6 offset bits do not. The set index
//    is bits 6:0 of the obfuscated field, the tag its bits 31:7. The mapping of
//    addresses to sets therefore changes with every key.
//  * Every stored word is d' = O_k(d). Refill data from memory is obfuscated
//    on the way in; a dirty line is de-obfuscated on its way out, and its
//    plain address is recovered as O_k^-1 of the stored tag and set.
// A lookup queries the cache ways, the line buffer (LB, the line last
// refilled) and the hit buffer (HB, the line last hit) in parallel; data come
// from HB, else LB, else the hitting way. One cycle after a hit the line is
// copied into the HB unless it is already there. Stores write the way and
// any buffer holding the line.
//
// Core port: req_valid with req_we, req_addr (38-bit obfuscated address) and
// req_wdata (one obfuscated 32-bit word). `ready` is combinational: high when
// the request hits and is (for a store) performed at the clock edge; rdata is
// the obfuscated word at the word offset. Sub-word stores are merged by the
// memory stage, which sends the whole new word.
// Miss: 16 word writes of the victim if it is dirty, then 16 word reads into
// the LB, critical word first (starting at the missing word and wrapping).
// A load is served (ready) in the cycle its critical word arrives, so the
// pipeline takes it on into MEM-WB and the PRF while the rest of the line
// is still coming; further requests wait until the line is installed, one
// cycle after its last word. A store miss is served after the install.
// Flush: a `flush` pulse writes back every dirty line, invalidates all lines
// and the buffers and then pulses flush_done; the remapping unit uses it
// before the key changes (the key input must stay at the old key meanwhile).
//
// From the paper: address obfuscation of tag and set index bits with the
// offset left plain (Eq. 7), obfuscated data in cache, LB and HB (Eq. 5),
// de-obfuscation on eviction (Eq. 6), 64-byte lines, 16 KB, parallel query of
// LB, HB and cache, HB copy in the following cycle, invalidation of the whole
// cache on a key change. Own choices: 2 ways x 128 sets, LRU replacement,
// word-by-word memory transfers, install after the full line has arrived,
// early restart for loads only.
module param_dcache
  import param_pkg::*;
#(
  parameter int unsigned SETS = 128,
  parameter int unsigned WAYS = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  // core (memory access unit)
  input  logic             req_valid,
  input  logic             req_we,
  input  logic [37:0]      req_addr,
  input  logic [XLEN-1:0]  req_wdata,
  output logic             ready,
  output logic [XLEN-1:0]  rdata,
  // remapping unit
  input  logic             flush,
  output logic             flush_done,
  // memory port (through the cache controller)
  output logic             mreq_valid,
  output mem_req_t         mreq,
  input  logic             mreq_ready,
  input  logic             mresp_valid,
  input  logic [XLEN-1:0]  mresp_rdata,
  // a miss or flush is in progress (a load may already have been served)
  output logic             busy,
  // events, for statistics
  output logic             ev_miss,
  output logic             ev_writeback
);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned TAG_W = 32 - IDX_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  typedef logic [LINE_WORDS-1:0][XLEN-1:0] line_t;

  logic             valid [WAYS][SETS];
  logic             dirty [WAYS][SETS];
  // tag and line arrays, indexed by {way, set}
  logic [TAG_W-1:0] tags  [WAYS*SETS];
  line_t            data  [WAYS*SETS];
  logic [WAY_W-1:0] lru   [SETS];      // way to replace next

  // ---------------------------------------------------------------- lookup
  logic [31:0]      q_ts;              // obfuscated tag+set field
  logic [IDX_W-1:0] q_set;
  logic [TAG_W-1:0] q_tag;
  logic [3:0]       q_word;
  assign q_ts   = req_addr[37:6];
  assign q_set  = q_ts[IDX_W-1:0];
  assign q_tag  = q_ts[31:IDX_W];
  assign q_word = req_addr[5:2];

  logic             way_hit;
  logic [WAY_W-1:0] hit_way;
  always_comb begin
    way_hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid[w][q_set] && tags[{WAY_W'(w), q_set}] == q_tag) begin
        way_hit = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
  end

  // line buffer and hit buffer
  logic        lb_valid, hb_valid;
  logic [31:0] lb_ts, hb_ts;
  line_t       lb_line, hb_line;
  logic        lb_hit, hb_hit;
  assign lb_hit = lb_valid && lb_ts == q_ts;
  assign hb_hit = hb_valid && hb_ts == q_ts;

  typedef enum logic [2:0] { S_IDLE, S_WB, S_FILL, S_INSTALL, S_FLUSH, S_FLUSH_WB } state_e;
  state_e state;

  // early restart: the critical word of a load miss is handed over as it arrives
  logic             crit_ready;
  logic [XLEN-1:0]  fill_word_obf;
  assign ready = ((state == S_IDLE) && !flush && req_valid && way_hit) || crit_ready;
  assign rdata = crit_ready ? fill_word_obf :
                 hb_hit ? hb_line[q_word] :
                 lb_hit ? lb_line[q_word] : data[{hit_way, q_set}][q_word];

  // ------------------------------------------------------------ miss engine
  logic [IDX_W-1:0] m_set;      // set being refilled / written back / flushed
  logic [WAY_W-1:0] m_way;
  logic [31:0]      m_ts;       // obfuscated tag+set of the refill
  logic [4:0]       cnt;        // word counter (bit 4: request sent, awaiting response)
  logic             sent;
  logic [3:0]       m_word;     // critical word: the refill starts here and wraps
  logic             m_we;       // the missing request is a store
  logic [3:0]       f_word;     // word of the line the current transfer carries
  assign f_word = (state == S_FILL) ? cnt[3:0] + m_word : cnt[3:0];
  assign crit_ready = (state == S_FILL) && sent && mresp_valid && cnt[3:0] == 4'd0 && !m_we &&
                      req_valid && !req_we && req_addr[37:2] == {m_ts, m_word};

  // plain address of the line in m_way/m_set (write back) or m_ts (refill)
  logic [31:0] ob_ts_in, plain_ts, wb_word_plain;
  assign ob_ts_in = (state == S_FILL) ? m_ts : {tags[{m_way, m_set}], m_set};
  param_obfuscator u_deobf_addr (.din(ob_ts_in), .key(key), .inverse(1'b1), .dout(plain_ts));
  param_obfuscator u_deobf_data (.din(data[{m_way, m_set}][cnt[3:0]]), .key(key), .inverse(1'b1),
                                 .dout(wb_word_plain));
  param_obfuscator u_obf_fill   (.din(mresp_rdata), .key(key), .inverse(1'b0), .dout(fill_word_obf));

  assign mreq_valid = (state == S_WB || state == S_FILL || state == S_FLUSH_WB) && !sent;
  assign mreq.we    = (state != S_FILL);
  assign mreq.addr  = {plain_ts[25:0], f_word, 2'b00};
  assign mreq.wdata = wb_word_plain;

  // victim: an invalid way if any, else the LRU way
  logic [WAY_W-1:0] victim;
  always_comb begin
    victim = lru[q_set];
    for (int w = WAYS - 1; w >= 0; w--) if (!valid[w][q_set]) victim = WAY_W'(w);
  end

  logic store_now;
  assign store_now = ready && req_we;

  // flush scan index
  logic [IDX_W+WAY_W-1:0] f_idx;
  logic                   f_last;
  assign f_last = (f_idx == (IDX_W+WAY_W)'(SETS * WAYS - 1));

  // hit buffer copy scheduled one cycle after a hit
  logic             hb_pend;
  logic [IDX_W-1:0] hb_set;
  logic [WAY_W-1:0] hb_way;
  logic [31:0]      hb_pts;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      lb_valid <= 1'b0; hb_valid <= 1'b0; hb_pend <= 1'b0;
      lb_ts <= '0; hb_ts <= '0; hb_pts <= '0; hb_set <= '0; hb_way <= '0;
      cnt <= '0; sent <= 1'b0; m_set <= '0; m_way <= '0; m_ts <= '0; f_idx <= '0;
      m_word <= '0; m_we <= 1'b0;
      flush_done <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        lru[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid[w][s] <= 1'b0;
          dirty[w][s] <= 1'b0;
        end
      end
    end else begin
      flush_done <= 1'b0;
      // hit buffer copy (with the store of this cycle merged in)
      hb_pend <= 1'b0;
      if (hb_pend) begin
        hb_valid <= 1'b1;
        hb_ts    <= hb_pts;
        hb_line  <= data[{hb_way, hb_set}];
        if (store_now && q_ts == hb_pts) hb_line[q_word] <= req_wdata;
      end

      unique case (state)
        S_IDLE: begin
          if (flush) begin
            lb_valid <= 1'b0; hb_valid <= 1'b0; hb_pend <= 1'b0;
            f_idx <= '0;
            state <= S_FLUSH;
          end else if (req_valid && way_hit) begin
            lru[q_set] <= (WAYS > 1) ? WAY_W'(hit_way + 1'b1) : '0;
            if (req_we) begin
              dirty[hit_way][q_set]         <= 1'b1;
              if (lb_hit) lb_line[q_word] <= req_wdata;
              if (hb_hit) hb_line[q_word] <= req_wdata;
            end
            if (!hb_hit) begin
              hb_pend <= 1'b1;
              hb_set  <= q_set;
              hb_way  <= hit_way;
              hb_pts  <= q_ts;
            end
          end else if (req_valid) begin
            // miss: the buffers may hold the victim, drop them
            lb_valid <= 1'b0; hb_valid <= 1'b0; hb_pend <= 1'b0;
            m_set <= q_set;
            m_way <= victim;
            m_ts  <= q_ts;
            m_word <= q_word;
            m_we  <= req_we;
            cnt   <= '0;
            sent  <= 1'b0;
            state <= (valid[victim][q_set] && dirty[victim][q_set]) ? S_WB : S_FILL;
          end
        end
        S_WB, S_FLUSH_WB: begin
          if (mreq_valid && mreq_ready) sent <= 1'b1;
          if (sent && mresp_valid) begin
            sent <= 1'b0;
            cnt  <= cnt + 5'd1;
            if (cnt[3:0] == 4'(LINE_WORDS - 1)) begin
              cnt <= '0;
              dirty[m_way][m_set] <= 1'b0;
              if (state == S_WB) state <= S_FILL;
              else begin
                valid[m_way][m_set] <= 1'b0;
                state <= S_FLUSH;
                f_idx <= f_idx + 1'b1;
                if (f_last) begin state <= S_IDLE; flush_done <= 1'b1; end
              end
            end
          end
        end
        S_FILL: begin
          if (mreq_valid && mreq_ready) sent <= 1'b1;
          if (sent && mresp_valid) begin
            sent <= 1'b0;
            lb_line[f_word] <= fill_word_obf;
            cnt <= cnt + 5'd1;
            if (cnt[3:0] == 4'(LINE_WORDS - 1)) state <= S_INSTALL;
          end
        end
        S_INSTALL: begin
          valid[m_way][m_set] <= 1'b1;
          dirty[m_way][m_set] <= 1'b0;
          lb_valid <= 1'b1;
          lb_ts    <= m_ts;
          cnt      <= '0;
          state    <= S_IDLE;
        end
        S_FLUSH: begin
          // f_idx = {set, way}
          m_set <= f_idx[WAY_W +: IDX_W];
          m_way <= f_idx[WAY_W-1:0];
          if (valid[f_idx[WAY_W-1:0]][f_idx[WAY_W +: IDX_W]] &&
              dirty[f_idx[WAY_W-1:0]][f_idx[WAY_W +: IDX_W]]) begin
            cnt   <= '0;
            sent  <= 1'b0;
            state <= S_FLUSH_WB;
          end else begin
            valid[f_idx[WAY_W-1:0]][f_idx[WAY_W +: IDX_W]] <= 1'b0;
            f_idx <= f_idx + 1'b1;
            if (f_last) begin state <= S_IDLE; flush_done <= 1'b1; end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Line and tag arrays: no reset, so that they map onto RAM. A store hit
  // writes one word; an install writes the whole line from the line buffer.
  always_ff @(posedge clk) begin
    if (rst_n && store_now) data[{hit_way, q_set}][q_word] <= req_wdata;
    if (rst_n && state == S_INSTALL) begin
      data[{m_way, m_set}] <= lb_line;
      tags[{m_way, m_set}] <= m_ts[31:IDX_W];
    end
  end

  assign busy = (state != S_IDLE);

  assign ev_miss      = (state == S_IDLE) && !flush && req_valid && !way_hit;
  assign ev_writeback = (state == S_WB || state == S_FLUSH_WB) && sent && mresp_valid &&
                        cnt[3:0] == 4'(LINE_WORDS - 1);

  // a store is only performed on a hit
  a_store_hits: assert property (@(posedge clk) disable iff (!rst_n)
                                 store_now |-> way_hit);
endmodule
