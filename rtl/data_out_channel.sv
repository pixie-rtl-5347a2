// Data-out channel: the memory interface at the bottom of the Pixie grid.
//
// Its predecessors are the PEs of the last level. Like any virtual channel
// it buffers their outputs and routes them, under configuration, to its
// outputs, which here are result words read by the controlling processor.
// Each result word is held in a register loaded when its valid pulse
// arrives, and a per-output "arrived" flag is set. Outputs not enabled in
// out_en are ignored. Once every enabled output has arrived, done is raised
// and stays high: this is the notification to the processor to fetch the
// results. A fetch pulse clears the flags and done; a result arriving in the
// same cycle as fetch counts for the next round. res_valid[j] additionally
// pulses for each result so that a streaming consumer can take every one.
//
// Interface
//   in_data[i]/in_valid[i]  last-level PE i
//   sel[j], out_en[j]       configuration of result j
//   res_data[j]             result j, held until the next one
//   res_valid[j]            one-cycle pulse per result j
//   done                    all enabled results present; cleared by fetch
// Timing: a last-level valid in cycle t gives res_valid in t+3 and done from
// t+3 (two channel buffer stages plus the holding register).
//
// From the text: the channel to memory and the notification that output data
// is ready. This design's choices: holding registers, per-output enables,
// and the done/fetch handshake.
module data_out_channel
  import pixie_pkg::*;
#(
  parameter int unsigned NUM_IN  = 9,
  parameter int unsigned IN_W    = 16,
  parameter int unsigned NUM_OUT = 9,
  parameter int unsigned OUT_W   = 16,
  localparam int unsigned SEL_W  = sel_width(NUM_IN)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SEL_W-1:0]   sel      [NUM_OUT],
  input  logic [NUM_OUT-1:0] out_en,
  input  logic [IN_W-1:0]    in_data  [NUM_IN],
  input  logic [NUM_IN-1:0]  in_valid,
  input  logic               fetch,
  output logic [OUT_W-1:0]   res_data [NUM_OUT],
  output logic [NUM_OUT-1:0] res_valid,
  output logic               done
);

  logic [OUT_W-1:0]   ch_data [NUM_OUT];
  logic [NUM_OUT-1:0] ch_valid;
  logic [NUM_OUT-1:0] arrived;

  vc #(
    .NUM_IN   (NUM_IN),
    .NUM_OUT  (NUM_OUT),
    .PORT_W   (IN_W),
    .IN_WIDTHS({NUM_IN{8'(IN_W)}}),
    .OUT_W    (OUT_W)
  ) u_vc (
    .clk,
    .rst_n,
    .sel,
    .in_data,
    .in_valid,
    .out_data (ch_data),
    .out_valid(ch_valid)
  );

  for (genvar j = 0; j < NUM_OUT; j++) begin : g_res
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        res_data[j]  <= '0;
        res_valid[j] <= 1'b0;
        arrived[j]   <= 1'b0;
      end else begin
        res_valid[j] <= ch_valid[j] && out_en[j];
        if (ch_valid[j] && out_en[j]) begin
          res_data[j] <= ch_data[j];
          arrived[j]  <= 1'b1;
        end else if (fetch) begin
          arrived[j]  <= 1'b0;
        end
      end
    end
  end

  always_comb done = (out_en != '0) && ((arrived | ~out_en) == '1);

endmodule
