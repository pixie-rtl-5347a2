// Virtual channel (VC) of the Pixie grid.
//
// A VC sits between two levels of processing elements. Every predecessor
// output (data word plus valid bit) is registered in an input buffer
// (IN_BUF) as it enters the channel. Inside, the data words are brought to one
// internal width N = max{all input widths, output width} by sign extension,
// and the valid bits form an M-bit vector, M = number of predecessors. Every
// channel output, i.e. every single input of a succeeding PE, has its own
// M-to-1 multiplexer whose select word (bw = ceil(log2 M) bits) comes from
// the channel configuration Conf_CH. The multiplexer routes a data word
// together with its own valid bit into an output buffer (OUT_BUF), where the
// word is cut to the output width. One channel input may feed any number of
// outputs; an output with an out-of-range select carries zero and no valid.
//
// Interface
//   sel[j]        Conf_CH select of output j (static configuration)
//   in_data[i]    predecessor i; only its low IN_WIDTHS[i] bits are used
//                 (IN_WIDTHS is a packed array of 8-bit widths)
//   in_valid[i]   valid pulse of predecessor i
//   out_data[j]   OUT_W-bit word for successor input j
//   out_valid[j]  valid pulse that goes with out_data[j]
// Timing: two register stages, so a valid pulse at the input in cycle t
// appears at the selected outputs in cycle t+2, with its data. Data words
// are buffered every cycle, as the text describes.
//
// From the text and its channel figure: input buffers, collected valid
// vector, one multiplexer per output carrying data and valid, output
// buffers, per-input widths, N = max of the widths, M = #predecessors,
// bw = ceil(log2 #predecessors). This design's choices: sign extension when
// widening, keeping the low bits when narrowing, and zero/no-valid for an
// unused select value.
module vc
  import pixie_pkg::*;
#(
  parameter int unsigned NUM_IN             = 3,
  parameter int unsigned NUM_OUT            = 2,
  parameter int unsigned PORT_W             = 16,
  parameter logic [NUM_IN-1:0][7:0] IN_WIDTHS = {NUM_IN{8'd16}},
  parameter int unsigned OUT_W              = 16,
  localparam int unsigned SEL_W             = sel_width(NUM_IN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SEL_W-1:0]  sel       [NUM_OUT],
  input  logic [PORT_W-1:0] in_data   [NUM_IN],
  input  logic [NUM_IN-1:0] in_valid,
  output logic [OUT_W-1:0]  out_data  [NUM_OUT],
  output logic [NUM_OUT-1:0] out_valid
);

  // Internal width N = max{A, B, C, ..., D}.
  function automatic int unsigned internal_width();
    int unsigned w = OUT_W;
    for (int i = 0; i < NUM_IN; i++) w = max2(w, int'(IN_WIDTHS[i]));
    return w;
  endfunction
  localparam int unsigned N = internal_width();

  logic [N-1:0]      in_buf [NUM_IN];
  logic [NUM_IN-1:0] valid_vec;

  // IN_BUF: one register per predecessor, sign-extended to N bits.
  for (genvar i = 0; i < NUM_IN; i++) begin : g_in
    localparam int unsigned W = int'(IN_WIDTHS[i]);
    if (W > PORT_W || W == 0) begin : g_bad_width
      $error("vc: IN_WIDTHS[%0d] must be between 1 and PORT_W", i);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) in_buf[i] <= '0;
      else        in_buf[i] <= N'(signed'(in_data[i][W-1:0]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_vec <= '0;
    else        valid_vec <= in_valid;
  end

  // One multiplexer and one OUT_BUF per successor input.
  for (genvar j = 0; j < NUM_OUT; j++) begin : g_out
    logic [N-1:0] mux_data;
    logic         mux_valid;
    always_comb begin
      mux_data  = '0;
      mux_valid = 1'b0;
      for (int i = 0; i < NUM_IN; i++) begin
        if (sel[j] == SEL_W'(i)) begin
          mux_data  = in_buf[i];
          mux_valid = valid_vec[i];
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_data[j]  <= '0;
        out_valid[j] <= 1'b0;
      end else begin
        out_data[j]  <= mux_data[OUT_W-1:0];
        out_valid[j] <= mux_valid;
      end
    end
  end

endmodule
