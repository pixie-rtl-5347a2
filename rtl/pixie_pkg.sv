// Shared types and helpers of the Pixie virtual CGRA.
//
// pe_op_e is the configuration word of a processing element (Conf_PE). The
// operation set follows the text: addition, subtraction, multiplication,
// division, the comparisons "greater than" and "equal to", a buffer mode and
// an idle mode (NONE). The mnemonics ADD, SUB, MUL, BUF, GRE and NONE are the
// ones printed in the grid figures; DIV and EQU are this design's names for
// the two remaining operations. The 3-bit encoding is this design's choice.
//
// pe_state_e holds the three states the text gives the PE controller.
package pixie_pkg;

  typedef enum logic [2:0] {
    OP_NONE = 3'd0,  // idle: never produces an output or a valid pulse
    OP_ADD  = 3'd1,  // a + b
    OP_SUB  = 3'd2,  // a - b
    OP_MUL  = 3'd3,  // a * b
    OP_DIV  = 3'd4,  // a / b, truncated toward zero
    OP_GRE  = 3'd5,  // (a > b) ? 1 : 0
    OP_EQU  = 3'd6,  // (a == b) ? 1 : 0
    OP_BUF  = 3'd7   // a copied to the output (both inputs carry the same word)
  } pe_op_e;

  typedef enum logic [1:0] {
    AWAIT_DATA   = 2'd0,
    PROCESS_DATA = 2'd1,
    VALID_DATA   = 2'd2
  } pe_state_e;

  // Width of a multiplexer select word: ceil(log2(#predecessors)), at least 1
  // so that a one-input channel still has a legal port.
  function automatic int unsigned sel_width(input int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  function automatic int unsigned max2(input int unsigned x, input int unsigned y);
    return (x > y) ? x : y;
  endfunction

endpackage
