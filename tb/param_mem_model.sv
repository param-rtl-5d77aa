// param_mem_model -- behavioural model of the off-chip memory behind the
// processor's bus port, for simulation only.
//
// WORDS x 32-bit words, byte address = word index * 4 (upper bits ignored).
// Accepts one request when no request is outstanding (bus_req_ready), and
// answers it LATENCY cycles later with bus_resp_valid (read data for a read,
// an acknowledgement for a write). Counts reads and writes.
module param_mem_model
  import param_pkg::*;
#(
  parameter int unsigned WORDS   = 16384,
  parameter int unsigned LATENCY = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            bus_req_valid,
  input  mem_req_t        bus_req,
  output logic            bus_req_ready,
  output logic            bus_resp_valid,
  output logic [XLEN-1:0] bus_resp_rdata
);
  logic [XLEN-1:0] mem [WORDS];
  int unsigned     reads, writes;
  logic            busy;
  int unsigned     wait_cnt;
  mem_req_t        cur;

  assign bus_req_ready = !busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; bus_resp_valid <= 1'b0; wait_cnt <= 0;
      bus_resp_rdata <= '0; reads <= 0; writes <= 0;
    end else begin
      bus_resp_valid <= 1'b0;
      if (!busy && bus_req_valid) begin
        busy <= 1'b1; cur <= bus_req; wait_cnt <= LATENCY;
      end else if (busy) begin
        if (wait_cnt <= 1) begin
          busy <= 1'b0;
          bus_resp_valid <= 1'b1;
          if (cur.we) begin
            mem[(cur.addr >> 2) % WORDS] <= cur.wdata;
            writes <= writes + 1;
          end else begin
            bus_resp_rdata <= mem[(cur.addr >> 2) % WORDS];
            reads <= reads + 1;
          end
        end else wait_cnt <= wait_cnt - 1;
      end
    end
  end
endmodule
