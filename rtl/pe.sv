// Fixed-point processing element (PE) of the Pixie grid.
//
// The PE is a three-state controller, AWAIT_DATA -> PROCESS_DATA ->
// VALID_DATA, around one two-operand arithmetic unit. Each operand input has
// its own valid line, driven by the valid output of the producing PE one
// level up (through a virtual channel). An operand word is captured into an
// input register in the cycle its valid is high, and a per-input "enabled"
// flag remembers that it has arrived. When both inputs are enabled the PE
// moves to PROCESS_DATA, computes op(a, b) into its output buffer, and in
// VALID_DATA raises result_valid for exactly one cycle. The output buffer
// keeps its value until the next result, so the next channel can sample it
// at any later time.
//
// Interface
//   op            Conf_PE: the operation, a static configuration input
//   a, b          operands, IN_W bits each (both inputs have the same width)
//   a_valid/b_valid  one-cycle enables of the two operands
//   result        output buffer, OUT_W bits
//   result_valid  high for one cycle per result
// Timing: operands complete in cycle t -> PROCESS_DATA in t+1 ->
// result_valid in t+2. A new operand set is accepted from cycle t+3 on;
// operands arriving during PROCESS_DATA or VALID_DATA are captured and kept
// for the next round. One result every 3 cycles at most.
//
// From the text: the three states, the operation set, the one-cycle valid,
// the output buffer, the input synchronisation by the predecessors' valid
// signals, equal input widths with a separate output width, BUF copying the
// data that the channel puts on both inputs, and NONE never producing an
// output or a valid. This design's choices: two's-complement operands;
// integer arithmetic (no fractional bits) computed at max(2*IN_W, OUT_W)
// bits and cut to the low OUT_W bits; division by zero gives all ones;
// comparisons give 1 or 0; operands are captured when their valid is high.
// The bits of the internal result above OUT_W are dropped on purpose (lint
// reports them as unused).
module pe
  import pixie_pkg::*;
#(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pe_op_e           op,
  input  logic [IN_W-1:0]  a,
  input  logic             a_valid,
  input  logic [IN_W-1:0]  b,
  input  logic             b_valid,
  output logic [OUT_W-1:0] result,
  output logic             result_valid
);

  localparam int unsigned EW = max2(2 * IN_W, OUT_W);

  pe_state_e        state;
  logic [IN_W-1:0]  a_q, b_q;     // input buffers
  logic             a_en, b_en;   // operand has arrived
  logic             both_ready;

  // An operand counts as present if it arrived earlier or arrives now.
  assign both_ready = (a_en || a_valid) && (b_en || b_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= AWAIT_DATA;
      a_q   <= '0;
      b_q   <= '0;
      a_en  <= 1'b0;
      b_en  <= 1'b0;
    end else begin
      if (a_valid) a_q <= a;
      if (b_valid) b_q <= b;
      unique case (state)
        AWAIT_DATA: begin
          if (op != OP_NONE && both_ready) begin
            state <= PROCESS_DATA;
            a_en  <= 1'b0;
            b_en  <= 1'b0;
          end else begin
            a_en  <= a_en || a_valid;
            b_en  <= b_en || b_valid;
          end
        end
        PROCESS_DATA: begin
          state <= VALID_DATA;
          a_en  <= a_en || a_valid;
          b_en  <= b_en || b_valid;
        end
        VALID_DATA: begin
          state <= AWAIT_DATA;
          a_en  <= a_en || a_valid;
          b_en  <= b_en || b_valid;
        end
        default: state <= AWAIT_DATA;
      endcase
    end
  end

  // Arithmetic unit, sign-extended to EW bits.
  logic signed [EW-1:0] xa, xb, alu;
  assign xa = EW'(signed'(a_q));
  assign xb = EW'(signed'(b_q));

  always_comb begin
    unique case (op)
      OP_ADD:  alu = xa + xb;
      OP_SUB:  alu = xa - xb;
      OP_MUL:  alu = xa * xb;
      OP_DIV: begin
        if (xb == '0) alu = '1;       // division by zero: all ones
        else          alu = xa / xb;  // signed, truncated toward zero
      end
      OP_GRE:  alu = EW'(xa > xb);
      OP_EQU:  alu = EW'(xa == xb);
      OP_BUF:  alu = xa;
      default: alu = '0;
    endcase
  end

  // Output buffer and one-cycle valid.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      if (state == PROCESS_DATA) result <= alu[OUT_W-1:0];
      result_valid <= (state == PROCESS_DATA);
    end
  end


  // Handshake rules: a result is announced for exactly one cycle, and only
  // by a PE that has an operation to perform.
  a_one_cycle_valid: assert property (@(posedge clk) disable iff (!rst_n)
    result_valid |=> !result_valid);
  a_none_is_silent: assert property (@(posedge clk) disable iff (!rst_n)
    (op == OP_NONE && state == AWAIT_DATA) |=> !result_valid);

endmodule
