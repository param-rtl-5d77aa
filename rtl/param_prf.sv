// param_prf -- forwarding register file ("PRF") of PARAM.
//
// Holds the results of the instructions in the pipeline stages after execute,
// so that decode can forward them before they reach the register file. Slot 0
// mirrors the instruction in the memory stage (written from the execute
// stage's output as the instruction leaves execute), slot 1 the instruction in
// the write-back stage (written as it leaves the memory stage, carrying the
// loaded word for loads). Each slot holds {valid, ready, rd, obfuscated data};
// `ready` is 0 for a load in slot 0, whose data is not yet known.
//
// Lookup: for a source register, the youngest valid slot with the same rd
// (and rd != 0) is reported with its readiness and data. The remapping unit
// can read and rewrite a slot's data through the remap port.
//
// Timing: slots change on the clock edge when `advance` is high; when `hold`
// is high slot 0 keeps its value while slot 1 takes a bubble (memory stall).
//
// From the paper: the PRF serves operand forwarding, holds obfuscated data and
// is remapped on a key change. Own choices: two slots tied to the stages,
// lookup priority and the port structure.
module param_prf
  import param_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            advance,     // memory stage moves on
  input  logic            hold,        // memory stage stalls: slot 1 becomes empty
  // new slot 0 from the execute stage
  input  logic            in0_valid,
  input  logic            in0_ready,
  input  logic [4:0]      in0_rd,
  input  logic [XLEN-1:0] in0_data,
  // data of slot 0 as it leaves the memory stage (load result)
  input  logic [XLEN-1:0] in1_data,
  // two lookups
  input  logic [4:0]      q_rs [2],
  output logic            q_hit [2],
  output logic            q_ready [2],
  output logic [XLEN-1:0] q_data [2],
  // remap port
  input  logic            remap_idx,
  output logic [XLEN-1:0] remap_rdata,
  input  logic            remap_we,
  input  logic [XLEN-1:0] remap_wdata
);
  typedef struct packed {
    logic            valid;
    logic            ready;
    logic [4:0]      rd;
    logic [XLEN-1:0] data;
  } slot_t;

  slot_t slot [2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      slot[0] <= '0;
      slot[1] <= '0;
    end else if (remap_we) begin
      slot[remap_idx].data <= remap_wdata;
    end else if (hold) begin
      slot[1] <= '0;
    end else if (advance) begin
      slot[1]      <= slot[0];
      slot[1].data <= in1_data;
      slot[1].ready <= 1'b1;
      slot[0] <= '{valid: in0_valid, ready: in0_ready, rd: in0_rd, data: in0_data};
    end
  end

  always_comb begin
    for (int q = 0; q < 2; q++) begin
      q_hit[q]   = 1'b0;
      q_ready[q] = 1'b0;
      q_data[q]  = '0;
      for (int s = 1; s >= 0; s--) begin   // slot 0 (younger) wins
        if (slot[s].valid && slot[s].rd == q_rs[q] && q_rs[q] != 5'd0) begin
          q_hit[q]   = 1'b1;
          q_ready[q] = slot[s].ready;
          q_data[q]  = slot[s].data;
        end
      end
    end
  end

  assign remap_rdata = slot[remap_idx].data;
endmodule
