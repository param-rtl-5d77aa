// param_regfile -- integer register file of PARAM, holding obfuscated words.
//
// 32 registers of 32 bits with two asynchronous read ports for operand fetch
// and one synchronous write port for write back. Every stored value is an
// obfuscated word d' = O_k(d); the file itself never sees plain data. Register
// x0 is never written; the execute stage treats index 0 as the constant 0.
// A third port lets the remapping unit read a register asynchronously and
// rewrite it with the value re-obfuscated under a new key; it has priority
// over the write-back port (the pipeline is drained while it is used).
//
// From the paper: obfuscated contents and remapping on a key change.
// Own choices: port structure, no reset of the contents.
module param_regfile
  import param_pkg::*;
(
  input  logic            clk,
  input  logic [4:0]      rs1,
  input  logic [4:0]      rs2,
  output logic [XLEN-1:0] rdata1,
  output logic [XLEN-1:0] rdata2,
  input  logic            we,
  input  logic [4:0]      rd,
  input  logic [XLEN-1:0] wdata,
  // remap port
  input  logic [4:0]      remap_idx,
  output logic [XLEN-1:0] remap_rdata,
  input  logic            remap_we,
  input  logic [XLEN-1:0] remap_wdata
);
  logic [XLEN-1:0] regs [32];

  assign rdata1      = regs[rs1];
  assign rdata2      = regs[rs2];
  assign remap_rdata = regs[remap_idx];

  always_ff @(posedge clk) begin
    if (remap_we && remap_idx != 5'd0)  regs[remap_idx] <= remap_wdata;
    else if (we && rd != 5'd0)          regs[rd]        <= wdata;
  end
endmodule
