// param_core -- the 5-stage in-order RV32IM pipeline of PARAM with an
// obfuscated data path.
//
// Stages: fetch (PC, branch prediction, instruction cache), decode and operand
// fetch, execute, memory access, write back, separated by the pipeline
// buffers IF-ID, ID-EX, EX-MEM and MEM-WB.
//
// Obfuscation: every data word in the register file, the PRF, the ID-EX,
// EX-MEM and MEM-WB buffers and the data cache is d' = O_k(d). Plain values
// exist only inside two stages:
//  * execute de-obfuscates its operands, runs the ALU or the mul/div unit,
//    and re-obfuscates the result (for a store: the store data) before the
//    EX-MEM buffer. The load/store address is obfuscated there too, as
//    O_k(addr[31:6]) || addr[5:0], so the data cache is indexed by it;
//  * the memory access unit de-obfuscates a loaded word to pick out a byte or
//    half-word and re-obfuscates it, and merges sub-word stores the same way.
// Register x0 reads as plain 0 in execute (its storage is never written).
//
// Leakage fix of the paper: each unit's operand register receives operands
// only for its own instructions and 0 otherwise. Here the ID-EX operand
// fields are loaded only with the source operands the instruction uses (0
// otherwise), the mul/div unit's operand register only for mul/div
// instructions and the BPU's update register only for branches and jumps.
//
// Hazards and control: results are forwarded into decode from the execute
// stage output and from the PRF (the instructions in memory and write back).
// A consumer of a load waits in decode while the load is in execute or memory
// (load-use stall). A mul/div instruction holds execute until the unit is
// done. A data-cache miss stalls everything up to memory. Branches and jumps
// are predicted in fetch by the BPU and resolved in execute; a misprediction
// flushes IF-ID and ID-EX and redirects the PC (misprediction flush).
// ECALL/EBREAK stop issue; `halted` rises once the pipeline is empty.
// `hold` (from the remapping unit) stops issue; `idle` says the stages after
// decode are empty. Traps, CSRs, FENCE.I and misaligned accesses are not
// implemented (CSR and system instructions other than ECALL/EBREAK are NOPs).
//
// From the paper: 5 in-order stages, the buffers and units of its block
// diagram, obfuscation of all data-path storage with de-obfuscation only
// where data are operated on, address obfuscation, operand forwarding through
// the PRF, misprediction flush, gated unit registers. Own choices: the RV32IM
// instruction set (the baseline is 64-bit), where forwarding and stalls occur,
// the handling of loads in the memory stage.
module param_core
  import param_pkg::*;
#(
  parameter logic [XLEN-1:0] RESET_PC = 32'h0000_0000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  // instruction cache
  output logic             ic_req,
  output logic [XLEN-1:0]  ic_pc,
  input  logic             ic_hit,
  input  logic [XLEN-1:0]  ic_instr,
  // data cache
  output logic             dc_req_valid,
  output logic             dc_req_we,
  output logic [37:0]      dc_req_addr,
  output logic [XLEN-1:0]  dc_req_wdata,
  input  logic             dc_ready,
  input  logic [XLEN-1:0]  dc_rdata,
  // remapping unit
  input  logic             hold,
  output logic             idle,
  input  logic [4:0]       rf_remap_idx,
  output logic [XLEN-1:0]  rf_remap_rdata,
  input  logic             rf_remap_we,
  input  logic [XLEN-1:0]  rf_remap_wdata,
  input  logic             prf_remap_idx,
  output logic [XLEN-1:0]  prf_remap_rdata,
  input  logic             prf_remap_we,
  input  logic [XLEN-1:0]  prf_remap_wdata,
  // status and events
  output logic             halted,
  output logic             ev_retire,
  output logic             ev_mispredict,
  output logic             ev_load_use,
  output logic             ev_dc_stall,
  output logic             ev_md_stall,
  output logic             ev_fwd_ex,
  output logic             ev_fwd_prf
);
  typedef enum logic [1:0] { A_RS1, A_PC, A_ZERO } asel_e;
  typedef enum logic [1:0] { B_RS2, B_IMM, B_FOUR } bsel_e;

  typedef struct packed {
    logic [4:0]      rs1, rs2, rd;
    logic            use_rs1, use_rs2, writes_rd;
    logic [XLEN-1:0] imm;
    alu_op_e         alu_op;
    asel_e           a_sel;
    bsel_e           b_sel;
    logic            is_load, is_store, is_branch, is_jal, is_jalr, is_muldiv, is_halt;
    logic [2:0]      funct3;
  } dec_t;

  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [XLEN-1:0] instr;
    logic            pred_taken;
    logic [XLEN-1:0] pred_target;
  } if_id_t;

  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    dec_t            d;
    logic [XLEN-1:0] rs1_obf, rs2_obf;
    logic            pred_taken;
    logic [XLEN-1:0] pred_target;
  } id_ex_t;

  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [4:0]      rd;
    logic            writes_rd, is_load, is_store;
    logic [2:0]      funct3;
    logic [37:0]     addr_obf;
    logic [XLEN-1:0] data_obf;
  } ex_mem_t;

  typedef struct packed {
    logic            valid;
    logic [XLEN-1:0] pc;
    logic [4:0]      rd;
    logic            writes_rd;
    logic [XLEN-1:0] data_obf;
  } mem_wb_t;

  function automatic dec_t decode(input logic [31:0] ins);
    dec_t d;
    logic [2:0] f3;
    f3 = ins[14:12];
    d = '0;
    d.rs1 = ins[19:15];
    d.rs2 = ins[24:20];
    d.rd  = ins[11:7];
    d.funct3 = f3;
    d.alu_op = ALU_ADD;
    d.a_sel  = A_RS1;
    d.b_sel  = B_IMM;
    d.imm    = {{20{ins[31]}}, ins[31:20]};
    case (ins[6:0])
      OP_LUI:   begin d.writes_rd = 1'b1; d.a_sel = A_ZERO; d.imm = {ins[31:12], 12'b0}; end
      OP_AUIPC: begin d.writes_rd = 1'b1; d.a_sel = A_PC;   d.imm = {ins[31:12], 12'b0}; end
      OP_JAL: begin
        d.writes_rd = 1'b1; d.is_jal = 1'b1; d.a_sel = A_PC; d.b_sel = B_FOUR;
        d.imm = {{12{ins[31]}}, ins[19:12], ins[20], ins[30:21], 1'b0};
      end
      OP_JALR: begin
        d.writes_rd = 1'b1; d.is_jalr = 1'b1; d.use_rs1 = 1'b1; d.a_sel = A_PC; d.b_sel = B_FOUR;
      end
      OP_BRANCH: begin
        d.is_branch = 1'b1; d.use_rs1 = 1'b1; d.use_rs2 = 1'b1; d.b_sel = B_RS2;
        d.imm = {{20{ins[31]}}, ins[7], ins[30:25], ins[11:8], 1'b0};
      end
      OP_LOAD:  begin d.writes_rd = 1'b1; d.is_load = 1'b1; d.use_rs1 = 1'b1; end
      OP_STORE: begin
        d.is_store = 1'b1; d.use_rs1 = 1'b1; d.use_rs2 = 1'b1;
        d.imm = {{20{ins[31]}}, ins[31:25], ins[11:7]};
      end
      OP_IMM, OP_REG: begin
        d.writes_rd = 1'b1; d.use_rs1 = 1'b1;
        if (ins[6:0] == OP_REG) begin d.use_rs2 = 1'b1; d.b_sel = B_RS2; end
        if (ins[6:0] == OP_REG && ins[31:25] == 7'b0000001) d.is_muldiv = 1'b1;
        case (f3)
          3'b000: d.alu_op = (ins[6:0] == OP_REG && ins[30]) ? ALU_SUB : ALU_ADD;
          3'b001: d.alu_op = ALU_SLL;
          3'b010: d.alu_op = ALU_SLT;
          3'b011: d.alu_op = ALU_SLTU;
          3'b100: d.alu_op = ALU_XOR;
          3'b101: d.alu_op = ins[30] ? ALU_SRA : ALU_SRL;
          3'b110: d.alu_op = ALU_OR;
          default: d.alu_op = ALU_AND;
        endcase
      end
      OP_SYSTEM: if (f3 == 3'b000 && ins[31:21] == 11'b0 && ins[19:7] == 13'b0) d.is_halt = 1'b1;
      default: ;
    endcase
    if (!d.writes_rd) d.rd = 5'd0;
    if (!d.use_rs1)   d.rs1 = 5'd0;
    if (!d.use_rs2)   d.rs2 = 5'd0;
    return d;
  endfunction

  if_id_t  if_id;
  id_ex_t  id_ex;
  ex_mem_t ex_mem;
  mem_wb_t mem_wb;
  logic [XLEN-1:0] pc;
  logic            halt_seen;

  // ================================================================ fetch
  logic            bp_taken;
  logic [XLEN-1:0] bp_target;
  logic            bpu_upd_valid, bpu_upd_taken;
  logic [XLEN-1:0] bpu_upd_pc, bpu_upd_target;

  param_bpu u_bpu (
    .clk, .rst_n, .pc(pc), .pred_taken(bp_taken), .pred_target(bp_target),
    .upd_valid(bpu_upd_valid), .upd_pc(bpu_upd_pc),
    .upd_target(bpu_upd_target), .upd_taken(bpu_upd_taken)
  );

  assign ic_req = 1'b1;
  assign ic_pc  = pc;

  // ================================================================ decode
  dec_t id_d;
  assign id_d = decode(if_id.instr);

  logic [XLEN-1:0] rf_rd1, rf_rd2;
  param_regfile u_rf (
    .clk, .rs1(id_d.rs1), .rs2(id_d.rs2), .rdata1(rf_rd1), .rdata2(rf_rd2),
    .we(mem_wb.valid && mem_wb.writes_rd), .rd(mem_wb.rd), .wdata(mem_wb.data_obf),
    .remap_idx(rf_remap_idx), .remap_rdata(rf_remap_rdata),
    .remap_we(rf_remap_we), .remap_wdata(rf_remap_wdata)
  );

  // execute-stage outputs needed for forwarding (defined below)
  logic [XLEN-1:0] ex_result_obf;
  logic            ex_fwd_ok;   // EX result is final this cycle (not a load)

  logic            prf_hit [2], prf_ready [2];
  logic [XLEN-1:0] prf_data [2];
  logic [4:0]      prf_q [2];
  assign prf_q[0] = id_d.rs1;
  assign prf_q[1] = id_d.rs2;

  logic [XLEN-1:0] opnd [2];
  logic            opnd_wait [2];
  logic            opnd_from_ex [2], opnd_from_prf [2];
  always_comb begin
    for (int s = 0; s < 2; s++) begin
      logic [4:0] rs;
      logic       used;
      rs   = (s == 0) ? id_d.rs1 : id_d.rs2;
      used = (s == 0) ? id_d.use_rs1 : id_d.use_rs2;
      opnd[s]          = (s == 0) ? rf_rd1 : rf_rd2;
      opnd_wait[s]     = 1'b0;
      opnd_from_ex[s]  = 1'b0;
      opnd_from_prf[s] = 1'b0;
      if (used && rs != 5'd0) begin
        if (id_ex.valid && id_ex.d.writes_rd && id_ex.d.rd == rs) begin
          opnd_from_ex[s] = 1'b1;
          opnd[s]         = ex_result_obf;
          opnd_wait[s]    = !ex_fwd_ok;
        end else if (prf_hit[s]) begin
          opnd_from_prf[s] = 1'b1;
          opnd[s]          = prf_data[s];
          opnd_wait[s]     = !prf_ready[s];
        end
      end
      if (!used) opnd[s] = '0;   // gated operand register
    end
  end

  logic load_use;
  assign load_use = if_id.valid && (opnd_wait[0] || opnd_wait[1]);

  // ================================================================ execute
  logic [XLEN-1:0] op_a_plain, op_b_plain, rs1_deobf, rs2_deobf;
  param_obfuscator u_deobf_a (.din(id_ex.rs1_obf), .key(key), .inverse(1'b1), .dout(rs1_deobf));
  param_obfuscator u_deobf_b (.din(id_ex.rs2_obf), .key(key), .inverse(1'b1), .dout(rs2_deobf));
  assign op_a_plain = (id_ex.d.rs1 == 5'd0) ? '0 : rs1_deobf;
  assign op_b_plain = (id_ex.d.rs2 == 5'd0) ? '0 : rs2_deobf;

  logic [XLEN-1:0] alu_a, alu_b, alu_y;
  logic            br_cond;
  always_comb begin
    unique case (id_ex.d.a_sel)
      A_PC:    alu_a = id_ex.pc;
      A_ZERO:  alu_a = '0;
      default: alu_a = op_a_plain;
    endcase
    unique case (id_ex.d.b_sel)
      B_RS2:   alu_b = op_b_plain;
      B_FOUR:  alu_b = 32'd4;
      default: alu_b = id_ex.d.imm;
    endcase
  end

  // branch comparison on the two register operands
  param_alu u_alu (
    .op(id_ex.d.alu_op), .a(alu_a), .b(alu_b), .y(alu_y),
    .br_funct3(id_ex.d.funct3), .br_taken(br_cond)
  );

  // mul/div unit with its own gated operand register
  logic            md_start, md_busy, md_done, md_have;
  logic [XLEN-1:0] md_result;
  assign md_start = id_ex.valid && id_ex.d.is_muldiv && !md_done && !md_have;
  param_muldiv u_md (
    .clk, .rst_n, .start(md_start), .op(md_op_e'(id_ex.d.funct3)),
    .a(op_a_plain), .b(op_b_plain), .busy(md_busy), .done(md_done), .result(md_result)
  );

  logic ex_busy;
  assign ex_busy = id_ex.valid && id_ex.d.is_muldiv && !(md_done || md_have);

  logic [XLEN-1:0] ex_value, ex_addr, ex_pc4, ex_target, ex_next, ex_pred_next;
  logic            ex_taken, ex_ctrl;
  assign ex_value  = id_ex.d.is_muldiv ? md_result : alu_y;
  assign ex_addr   = op_a_plain + id_ex.d.imm;
  assign ex_pc4    = id_ex.pc + 32'd4;
  assign ex_ctrl   = id_ex.d.is_branch || id_ex.d.is_jal || id_ex.d.is_jalr;
  assign ex_taken  = id_ex.d.is_jal || id_ex.d.is_jalr || (id_ex.d.is_branch && br_cond);
  assign ex_target = id_ex.d.is_jalr ? {ex_addr[XLEN-1:1], 1'b0} : id_ex.pc + id_ex.d.imm;
  assign ex_next   = ex_taken ? ex_target : ex_pc4;
  assign ex_pred_next = id_ex.pred_taken ? id_ex.pred_target : ex_pc4;

  // re-obfuscation of the result (or store data) and of the address
  logic [XLEN-1:0] ex_ts_obf;
  param_obfuscator u_obf_res  (.din(id_ex.d.is_store ? op_b_plain : ex_value), .key(key),
                               .inverse(1'b0), .dout(ex_result_obf));
  param_obfuscator u_obf_addr (.din({6'b0, ex_addr[XLEN-1:OFFSET_W]}), .key(key),
                               .inverse(1'b0), .dout(ex_ts_obf));
  assign ex_fwd_ok = !id_ex.d.is_load && !ex_busy;

  // ================================================================ memory
  logic mem_op, mem_stall;
  assign mem_op       = ex_mem.valid && (ex_mem.is_load || ex_mem.is_store);
  assign dc_req_valid = mem_op;
  assign dc_req_we    = ex_mem.is_store;
  assign dc_req_addr  = ex_mem.addr_obf;
  assign mem_stall    = mem_op && !dc_ready;

  logic [XLEN-1:0] mem_word_plain, mem_sdata_plain, mem_obf_in, mem_obf_out, mem_out;
  param_obfuscator u_deobf_ld (.din(dc_rdata), .key(key), .inverse(1'b1), .dout(mem_word_plain));
  param_obfuscator u_deobf_st (.din(ex_mem.data_obf), .key(key), .inverse(1'b1), .dout(mem_sdata_plain));
  assign mem_obf_in = ex_mem.is_store
      ? store_merge(mem_word_plain, mem_sdata_plain, ex_mem.addr_obf[1:0], ex_mem.funct3)
      : load_extract(mem_word_plain, ex_mem.addr_obf[1:0], ex_mem.funct3);
  param_obfuscator u_obf_mem (.din(mem_obf_in), .key(key), .inverse(1'b0), .dout(mem_obf_out));
  assign dc_req_wdata = mem_obf_out;
  assign mem_out      = ex_mem.is_load ? mem_obf_out : ex_mem.data_obf;

  // ================================================================ PRF
  logic ex_adv, id_issue, redirect;
  assign ex_adv   = !mem_stall && !ex_busy;                  // EX-MEM takes the EX output
  assign redirect = ex_adv && id_ex.valid && (ex_next != ex_pred_next);
  assign id_issue = ex_adv && !redirect && if_id.valid && !load_use && !hold && !halt_seen;

  param_prf u_prf (
    .clk, .rst_n, .advance(!mem_stall), .hold(mem_stall),
    .in0_valid(ex_adv && id_ex.valid && id_ex.d.writes_rd), .in0_ready(!id_ex.d.is_load),
    .in0_rd(id_ex.d.rd), .in0_data(ex_result_obf),
    .in1_data(mem_out),
    .q_rs(prf_q), .q_hit(prf_hit), .q_ready(prf_ready), .q_data(prf_data),
    .remap_idx(prf_remap_idx), .remap_rdata(prf_remap_rdata),
    .remap_we(prf_remap_we), .remap_wdata(prf_remap_wdata)
  );

  // BPU update (gated inside the BPU)
  assign bpu_upd_valid  = ex_adv && id_ex.valid && ex_ctrl;
  assign bpu_upd_pc     = id_ex.pc;
  assign bpu_upd_target = ex_target;
  assign bpu_upd_taken  = ex_taken;

  // ================================================================ registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc <= RESET_PC;
      if_id <= '0; id_ex <= '0; ex_mem <= '0; mem_wb <= '0;
      halt_seen <= 1'b0;
      md_have <= 1'b0;
    end else begin
      // MEM -> WB
      if (mem_stall) mem_wb <= '0;
      else mem_wb <= '{valid: ex_mem.valid, pc: ex_mem.pc, rd: ex_mem.rd,
                       writes_rd: ex_mem.writes_rd, data_obf: mem_out};
      // EX -> MEM
      if (!mem_stall) begin
        if (ex_busy || !id_ex.valid) ex_mem <= '0;
        else ex_mem <= '{valid: 1'b1, pc: id_ex.pc, rd: id_ex.d.rd,
                         writes_rd: id_ex.d.writes_rd, is_load: id_ex.d.is_load,
                         is_store: id_ex.d.is_store, funct3: id_ex.d.funct3,
                         addr_obf: {ex_ts_obf, ex_addr[OFFSET_W-1:0]},
                         data_obf: ex_result_obf};
      end
      // mul/div result kept while the memory stage stalls
      if (ex_adv) md_have <= 1'b0;
      else if (md_done) md_have <= 1'b1;
      // ID -> EX
      if (ex_adv) begin
        if (id_issue)
          id_ex <= '{valid: 1'b1, pc: if_id.pc, d: id_d, rs1_obf: opnd[0], rs2_obf: opnd[1],
                     pred_taken: if_id.pred_taken, pred_target: if_id.pred_target};
        else
          id_ex <= '0;
        if (id_issue && id_d.is_halt) halt_seen <= 1'b1;
      end
      // IF -> ID and PC
      if (redirect) begin
        if_id <= '0;
        pc    <= ex_next;
      end else if (!ex_adv || (if_id.valid && !id_issue)) begin
        // decode (or later) is stalled: hold
      end else if (ic_hit && !halt_seen) begin
        if_id <= '{valid: 1'b1, pc: pc, instr: ic_instr,
                   pred_taken: bp_taken, pred_target: bp_target};
        pc    <= bp_taken ? bp_target : pc + 32'd4;
      end else begin
        if_id <= '0;
      end
    end
  end

  assign idle   = !id_ex.valid && !ex_mem.valid && !mem_wb.valid;
  assign halted = halt_seen && idle;

  assign ev_retire     = mem_wb.valid;
  assign ev_mispredict = redirect;
  assign ev_load_use   = load_use && ex_adv && !redirect && !hold;
  assign ev_dc_stall   = mem_stall;
  assign ev_md_stall   = ex_busy;
  assign ev_fwd_ex     = id_issue && (opnd_from_ex[0] || opnd_from_ex[1]);
  assign ev_fwd_prf    = id_issue && (opnd_from_prf[0] || opnd_from_prf[1]);

  // a data-cache write is only issued by a store in the memory stage
  a_store_only: assert property (@(posedge clk) disable iff (!rst_n)
                                 (dc_req_valid && dc_req_we) |-> ex_mem.is_store);
endmodule
