// Data-in channel: the memory interface at the top of the Pixie grid.
//
// It is a virtual channel whose predecessors are memory words written by the
// controlling processor instead of PE outputs. An external configuration
// (the select words) distributes the words to the inputs of the first PE
// level; one word may feed several PE inputs. The words themselves carry no
// valid signal: the external synchronous start signal, sampled with the
// words, acts as the valid of every word, so all first-level inputs are
// enabled together once the processor has supplied the data.
//
// Interface
//   mem_data[i]   memory word i (MEM_W bits), sampled every cycle
//   start         one-cycle start pulse, launches the words present with it
//   sel[j]        select of first-level input j (ceil(log2 NUM_MEM_IN) bits)
//   out_data[j]/out_valid[j]  to first-level PE input j
// Timing: start in cycle t -> out_valid in cycle t+2 (the two buffer stages
// of a virtual channel). A start every cycle is accepted; the PEs below
// limit the useful rate to one start every 3 cycles.
//
// From the text: the memory-interface channel, the configured distribution
// of incoming data, the synchronous start signal enabling the first level.
// This design's choice: start is used as the valid bit of every word, and
// the channel reuses the virtual-channel datapath.
module data_in_channel
  import pixie_pkg::*;
#(
  parameter int unsigned NUM_MEM_IN = 18,
  parameter int unsigned MEM_W      = 16,
  parameter int unsigned NUM_OUT    = 18,
  parameter int unsigned OUT_W      = 16,
  localparam int unsigned SEL_W     = sel_width(NUM_MEM_IN)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [SEL_W-1:0]   sel      [NUM_OUT],
  input  logic [MEM_W-1:0]   mem_data [NUM_MEM_IN],
  output logic [OUT_W-1:0]   out_data [NUM_OUT],
  output logic [NUM_OUT-1:0] out_valid
);

  vc #(
    .NUM_IN   (NUM_MEM_IN),
    .NUM_OUT  (NUM_OUT),
    .PORT_W   (MEM_W),
    .IN_WIDTHS({NUM_MEM_IN{8'(MEM_W)}}),
    .OUT_W    (OUT_W)
  ) u_vc (
    .clk,
    .rst_n,
    .sel,
    .in_data  (mem_data),
    .in_valid ({NUM_MEM_IN{start}}),
    .out_data,
    .out_valid
  );

endmodule
