// Floating-point processing element of the Pixie grid.
//
// Same controller as the fixed-point PE (AWAIT_DATA -> PROCESS_DATA ->
// VALID_DATA, operands enabled by their valid pulses, output buffer with a
// one-cycle valid), around a floating-point unit that adds or multiplies.
//
// Number format (FloPoCo style), W = WE + WF + 3 bits, MSB first:
//   exn[1:0]  00 zero, 01 normal, 10 infinity, 11 NaN
//   sign      1 = negative
//   exp       WE-bit exponent, biased by 2^(WE-1)-1; every value 0..2^WE-1
//             is a normal exponent (special values live in exn)
//   frac      WF fraction bits of the significand 1.frac
// There are no subnormals: a result below the smallest normal flushes to
// zero, a result above the largest overflows to infinity.
//
// Operations (Conf_PE): OP_ADD, OP_MUL, OP_BUF (a copied to the output) and
// OP_NONE (idle). The other codes of pe_op_e have no floating-point meaning
// here and leave the PE idle like OP_NONE.
// Arithmetic: the adder aligns both significands exactly in a register wide
// enough for any exponent difference (2^WE guard bits), adds or subtracts,
// normalises with a leading-one search and rounds once to nearest, ties to
// even. The multiplier forms the exact 2*(WF+1)-bit product and rounds it the
// same way. NaN in gives NaN; inf - inf and 0 * inf give NaN; an exact
// cancellation gives +0.
// Timing: as the fixed-point PE, result_valid 2 cycles after the last
// operand, at most one result per 3 cycles. The arithmetic is a single
// combinational step in PROCESS_DATA.
//
// From the text: a floating-point PE for addition and multiplication, with a
// 6-bit exponent and a 26-bit mantissa in the FloPoCo format. The text takes
// its operators from the FloPoCo generator and does not describe them; the
// operators here are this design's own single-cycle versions, and the
// rounding mode and exception handling are assumptions that follow the
// usual FloPoCo conventions. In the adder's normal path the exception fields
// of the swapped operands are not needed (lint reports them as unused).
module pe_fp
  import pixie_pkg::*;
#(
  parameter int unsigned WE = 6,
  parameter int unsigned WF = 26,
  localparam int unsigned W = WE + WF + 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  pe_op_e       op,
  input  logic [W-1:0] a,
  input  logic         a_valid,
  input  logic [W-1:0] b,
  input  logic         b_valid,
  output logic [W-1:0] result,
  output logic         result_valid
);

  typedef struct packed {
    logic [1:0]    exn;
    logic          sign;
    logic [WE-1:0] exp;
    logic [WF-1:0] frac;
  } fp_t;

  localparam logic [1:0] EXN_ZERO = 2'b00, EXN_NORM = 2'b01, EXN_INF = 2'b10, EXN_NAN = 2'b11;
  localparam int         BIAS     = (1 << (WE - 1)) - 1;
  localparam int         EMAX     = (1 << WE) - 1;
  localparam int unsigned SW      = WF + 1;         // significand 1.frac
  localparam int unsigned XB      = 1 << WE;        // room for any alignment shift
  localparam int unsigned AW      = 1 + SW + XB;    // carry + significand + room

  localparam fp_t FP_NAN = '{exn: EXN_NAN, sign: 1'b0, exp: '0, frac: '0};

  // ------------------------------------------------------------ controller
  pe_state_e state;
  fp_t       a_q, b_q;
  logic      a_en, b_en, both_ready, active;

  assign active     = (op == OP_ADD) || (op == OP_MUL) || (op == OP_BUF);
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
          if (active && both_ready) begin
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

  // ------------------------------------------------- round and pack a result
  // e is the biased exponent of 1.frac; rnd is the first dropped bit and
  // stk the OR of all bits below it.
  function automatic fp_t round_pack(logic s, int e, logic [WF-1:0] frac, logic rnd, logic stk);
    fp_t          r;
    logic [WF:0]  f;
    int           ee;
    f  = {1'b0, frac} + (WF+1)'(rnd && (stk || frac[0]));
    ee = e + int'(f[WF]);               // rounding carried out of the fraction
    r.sign = s;
    if (ee > EMAX) begin
      r.exn = EXN_INF; r.exp = '0; r.frac = '0;
    end else if (ee < 0) begin
      r.exn = EXN_ZERO; r.exp = '0; r.frac = '0;
    end else begin
      r.exn = EXN_NORM; r.exp = WE'(ee); r.frac = f[WF-1:0];
    end
    return r;
  endfunction

  // ----------------------------------------------------------- multiplier
  fp_t mul_res;
  always_comb begin
    logic [2*SW-1:0] prod, norm;
    int              e;
    prod = {1'b1, a_q.frac} * {1'b1, b_q.frac};
    norm = prod[2*SW-1] ? prod : prod << 1;
    e    = int'(a_q.exp) + int'(b_q.exp) - BIAS + int'(prod[2*SW-1]);
    if (a_q.exn == EXN_NAN || b_q.exn == EXN_NAN ||
        (a_q.exn == EXN_INF && b_q.exn == EXN_ZERO) ||
        (a_q.exn == EXN_ZERO && b_q.exn == EXN_INF)) begin
      mul_res = FP_NAN;
    end else if (a_q.exn == EXN_INF || b_q.exn == EXN_INF) begin
      mul_res = '{exn: EXN_INF, sign: a_q.sign ^ b_q.sign, exp: '0, frac: '0};
    end else if (a_q.exn == EXN_ZERO || b_q.exn == EXN_ZERO) begin
      mul_res = '{exn: EXN_ZERO, sign: a_q.sign ^ b_q.sign, exp: '0, frac: '0};
    end else begin
      mul_res = round_pack(a_q.sign ^ b_q.sign, e, norm[2*SW-2 -: WF],
                           norm[2*SW-2-WF], |norm[2*SW-3-WF:0]);
    end
  end

  // ---------------------------------------------------------------- adder
  fp_t add_res;
  always_comb begin
    fp_t                 greater, lesser;
    logic [AW-1:0]       ab, as, sum, norm;
    logic [WE-1:0]       d;
    int                  lead, e;
    logic                swap;
    swap  = {b_q.exp, b_q.frac} > {a_q.exp, a_q.frac};
    greater   = swap ? b_q : a_q;
    lesser = swap ? a_q : b_q;
    d     = greater.exp - lesser.exp;
    ab    = {1'b0, 1'b1, greater.frac,   XB'(0)};
    as    = {1'b0, 1'b1, lesser.frac, XB'(0)} >> d;
    sum   = (greater.sign == lesser.sign) ? ab + as : ab - as;
    lead  = 0;
    for (int k = 0; k < AW; k++) if (sum[k]) lead = k;
    norm  = sum << (AW - 1 - lead);
    e     = int'(greater.exp) + lead - int'(SW + XB - 1);
    if (a_q.exn == EXN_NAN || b_q.exn == EXN_NAN ||
        (a_q.exn == EXN_INF && b_q.exn == EXN_INF && a_q.sign != b_q.sign)) begin
      add_res = FP_NAN;
    end else if (a_q.exn == EXN_INF) begin
      add_res = a_q;
    end else if (b_q.exn == EXN_INF) begin
      add_res = b_q;
    end else if (a_q.exn == EXN_ZERO && b_q.exn == EXN_ZERO) begin
      add_res = '{exn: EXN_ZERO, sign: a_q.sign & b_q.sign, exp: '0, frac: '0};
    end else if (a_q.exn == EXN_ZERO) begin
      add_res = b_q;
    end else if (b_q.exn == EXN_ZERO) begin
      add_res = a_q;
    end else if (sum == '0) begin
      add_res = '{exn: EXN_ZERO, sign: 1'b0, exp: '0, frac: '0};
    end else begin
      add_res = round_pack(greater.sign, e, norm[AW-2 -: WF], norm[AW-2-WF], |norm[AW-3-WF:0]);
    end
  end

  // ------------------------------------------------ output buffer and valid
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result       <= '0;
      result_valid <= 1'b0;
    end else begin
      if (state == PROCESS_DATA) begin
        unique case (op)
          OP_ADD:  result <= add_res;
          OP_MUL:  result <= mul_res;
          default: result <= a_q;
        endcase
      end
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
