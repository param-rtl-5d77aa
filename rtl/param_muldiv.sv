// param_muldiv -- multiply/divide unit of the PARAM execute stage (RV32M).
//
// The unit owns its operand register. Following the leakage fix described for
// the execute stage, that register is loaded with the operands only when the
// instruction in execute is a multiply or divide (`start`); for every other
// instruction it is loaded with 0, so ALU operands never pass through it.
// A multiply takes one cycle after capture; a divide runs a restoring
// shift-subtract loop of 32 cycles on the operand magnitudes and fixes the
// signs at the end (RISC-V results for division by zero and overflow).
//
// Interface: start (muldiv instruction waiting in execute), op (funct3),
// a, b (plain operands). done pulses for one cycle with result; the caller
// keeps start high until then and must drop it the cycle after done.
// Latency, counted from the first cycle of start to the cycle done is high:
// 2 cycles for a multiply, 35 for a divide.
//
// From the paper: the gated operand register of the Mul-Div unit (Fig. 7a,
// Fig. 10b). Own choices: the algorithms and the latencies.
module param_muldiv
  import param_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  md_op_e          op,
  input  logic [XLEN-1:0] a,
  input  logic [XLEN-1:0] b,
  output logic            busy,
  output logic            done,
  output logic [XLEN-1:0] result
);
  typedef enum logic [1:0] { S_IDLE, S_MUL, S_DIV, S_FIX } state_e;
  state_e state;

  // operand register (gated: 0 unless a muldiv instruction is captured)
  logic [XLEN-1:0] a_q, b_q;
  md_op_e          op_q;

  logic [XLEN-1:0] quo, rem, dvs;
  logic [5:0]      cnt;
  logic            neg_q, neg_r;

  logic signed [65:0] prod;
  logic        [32:0] sa, sb;
  always_comb begin
    sa = {(op_q == MD_MULH || op_q == MD_MULHSU) & a_q[31], a_q};
    sb = {(op_q == MD_MULH) & b_q[31], b_q};
    prod = $signed({{33{sa[32]}}, sa}) * $signed({{33{sb[32]}}, sb});
  end

  logic signed_div;
  assign signed_div = (op_q == MD_DIV || op_q == MD_REM);

  logic [XLEN+1:0] trial;   // shifted remainder minus divisor, bit XLEN+1 = borrow
  assign trial = {1'b0, rem, quo[XLEN-1]} - {2'b0, dvs};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      a_q <= '0; b_q <= '0; op_q <= MD_MUL;
      done <= 1'b0; result <= '0;
      quo <= '0; rem <= '0; dvs <= '0; cnt <= '0; neg_q <= 1'b0; neg_r <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          a_q  <= start ? a  : '0;
          b_q  <= start ? b  : '0;
          op_q <= start ? op : MD_MUL;
          if (start) state <= op[2] ? S_DIV : S_MUL;
          cnt <= '0;
        end
        S_MUL: begin
          result <= (op_q == MD_MUL) ? prod[31:0] : prod[63:32];
          done   <= 1'b1;
          state  <= S_IDLE;
        end
        S_DIV: begin
          if (cnt == 6'd0) begin
            // load magnitudes
            quo   <= (signed_div && a_q[31]) ? -a_q : a_q;
            dvs   <= (signed_div && b_q[31]) ? -b_q : b_q;
            rem   <= '0;
            neg_q <= signed_div && (a_q[31] ^ b_q[31]) && (b_q != 0);
            neg_r <= signed_div && a_q[31];
            cnt   <= 6'd1;
          end else begin
            if (!trial[XLEN+1]) begin
              rem <= trial[XLEN-1:0];
              quo <= {quo[XLEN-2:0], 1'b1};
            end else begin
              rem <= {rem[XLEN-2:0], quo[XLEN-1]};
              quo <= {quo[XLEN-2:0], 1'b0};
            end
            cnt <= cnt + 6'd1;
            if (cnt == 6'd32) state <= S_FIX;
          end
        end
        S_FIX: begin
          if (op_q == MD_DIV || op_q == MD_DIVU) result <= neg_q ? -quo : quo;
          else                                   result <= neg_r ? -rem : rem;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
