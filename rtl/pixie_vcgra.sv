// Pixie virtual CGRA grid (top level).
//
// The grid is a stack of NUM_LEVELS levels of processing elements. Data flows
// from the top to the bottom: a data-in channel distributes memory words to
// the first level, a virtual channel between every two neighbouring levels
// routes the results of one level to the operand inputs of the next, and a
// data-out channel collects results of the last level for the processor.
// Each level is one pipeline stage; a PE fires as soon as both of its
// operands have arrived, so only the first level needs an external trigger
// (start) and the rest synchronise through the valid signals that travel
// with the data. Levels may hold different numbers of PEs (LEVEL_PES) and
// different input/output widths (LEVEL_IN_W, LEVEL_OUT_W); the channels
// adapt the widths. The default shape is the edge-detection grid: 5 levels
// of 9 PEs, 4 virtual channels between them (45 PEs in all), 18 memory words
// in (9 pixels and 9 coefficients) and 9 result words out.
//
// Configuration (static inputs, the "parameters" of the reconfiguration flow)
//   cfg_in_sel[j]       data-in channel: memory word for first-level input j
//   cfg_pe_op[l][p]     operation of PE p of level l (Conf_PE)
//   cfg_vc_sel[k][j]    channel k (between level k and k+1): predecessor for
//                       input j of level k+1; PE p owns inputs 2p (a), 2p+1 (b)
//   cfg_out_sel[r]      data-out channel: last-level PE for result r
//   cfg_out_en[r]       result r is awaited before done
// Data and control
//   mem_in[i], start    words from memory and the one-cycle start pulse
//   mem_out[r], mem_out_valid[r], done, fetch   results, per-result pulses,
//                       the "results ready" notification and its clear
// Timing: start in cycle t reaches the first level in t+2; every level then
// adds 2 cycles of PE and 2 of channel (the last level's channel being the
// data-out channel), and the holding register adds 1. For L levels the
// result is in mem_out with mem_out_valid at t + 4*L + 3 (23 cycles for the
// default 5 levels). A new start may follow every 3 cycles.
//
// From the text and its grid figures: the level/channel structure, the
// memory-interface channels, start-driven first level, valid-driven
// synchronisation of the other levels, the done notification, one
// configuration per PE and per channel output, non-rectangular grids, and
// the default 9 x 5 shape of the edge-detection grid. This design's choices:
// all bit widths (16), the number of memory words in and out, and the
// done/fetch handshake. FLOAT_PE = 1 builds every PE as the floating-point
// PE (add and multiply, FloPoCo format with a 26-bit fraction; the level
// widths must then all be 29 + the exponent width, 35 for the 6-bit exponent
// of the text, and DATA_W and MEM_W at least that). Levels cannot be bypassed: a value that has to cross
// a level is carried by a PE in BUF mode, as in the text.
module pixie_vcgra
  import pixie_pkg::*;
#(
  parameter int unsigned NUM_LEVELS  = 5,
  parameter int unsigned PE_MAX      = 9,
  parameter logic [NUM_LEVELS-1:0][7:0] LEVEL_PES = {NUM_LEVELS{8'(PE_MAX)}},
  parameter int unsigned DATA_W      = 16,
  parameter logic [NUM_LEVELS-1:0][7:0] LEVEL_IN_W  = {NUM_LEVELS{8'(DATA_W)}},
  parameter logic [NUM_LEVELS-1:0][7:0] LEVEL_OUT_W = {NUM_LEVELS{8'(DATA_W)}},
  parameter int unsigned NUM_MEM_IN  = 18,
  parameter int unsigned MEM_W       = 16,
  parameter int unsigned NUM_MEM_OUT = 9,
  parameter bit          FLOAT_PE    = 1'b0,
  localparam int unsigned IN_SEL_W   = sel_width(NUM_MEM_IN),
  localparam int unsigned VC_SEL_W   = sel_width(PE_MAX)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic [IN_SEL_W-1:0]   cfg_in_sel  [2*PE_MAX],
  input  pe_op_e                cfg_pe_op   [NUM_LEVELS][PE_MAX],
  input  logic [VC_SEL_W-1:0]   cfg_vc_sel  [NUM_LEVELS-1][2*PE_MAX],
  input  logic [VC_SEL_W-1:0]   cfg_out_sel [NUM_MEM_OUT],
  input  logic [NUM_MEM_OUT-1:0] cfg_out_en,
  // memory side
  input  logic                  start,
  input  logic [MEM_W-1:0]      mem_in      [NUM_MEM_IN],
  output logic [MEM_W-1:0]      mem_out     [NUM_MEM_OUT],
  output logic [NUM_MEM_OUT-1:0] mem_out_valid,
  output logic                  done,
  input  logic                  fetch
);

  if (NUM_LEVELS < 2) begin : g_bad_levels
    $error("pixie_vcgra: NUM_LEVELS must be at least 2");
  end

  // Operand inputs of every level (2 per PE) and results of every level.
  logic [DATA_W-1:0]     lvl_in      [NUM_LEVELS][2*PE_MAX];
  logic [2*PE_MAX-1:0]   lvl_in_vld  [NUM_LEVELS];
  logic [DATA_W-1:0]     lvl_res     [NUM_LEVELS][PE_MAX];
  logic [PE_MAX-1:0]     lvl_res_vld [NUM_LEVELS];

  // ---------------------------------------------------------------- data in
  localparam int unsigned P0  = int'(LEVEL_PES[0]);
  localparam int unsigned IW0 = int'(LEVEL_IN_W[0]);
  begin : g_din
    logic [IN_SEL_W-1:0] sel  [2*P0];
    logic [IW0-1:0]      data [2*P0];
    logic [2*P0-1:0]     vld;
    for (genvar j = 0; j < 2 * P0; j++) begin : g_sel
      assign sel[j] = cfg_in_sel[j];
    end
    data_in_channel #(
      .NUM_MEM_IN(NUM_MEM_IN),
      .MEM_W     (MEM_W),
      .NUM_OUT   (2 * P0),
      .OUT_W     (IW0)
    ) u_din (
      .clk,
      .rst_n,
      .start,
      .sel,
      .mem_data (mem_in),
      .out_data (data),
      .out_valid(vld)
    );
    for (genvar j = 0; j < 2 * PE_MAX; j++) begin : g_conn
      if (j < 2 * P0) begin : g_used
        assign lvl_in[0][j]     = DATA_W'(data[j]);
        assign lvl_in_vld[0][j] = vld[j];
      end else begin : g_unused
        assign lvl_in[0][j]     = '0;
        assign lvl_in_vld[0][j] = 1'b0;
      end
    end
  end

  // ------------------------------------------------------- levels of PEs
  for (genvar l = 0; l < NUM_LEVELS; l++) begin : g_lvl
    localparam int unsigned NP = int'(LEVEL_PES[l]);
    localparam int unsigned IW = int'(LEVEL_IN_W[l]);
    localparam int unsigned OW = int'(LEVEL_OUT_W[l]);
    if (NP < 1 || NP > PE_MAX || IW > DATA_W || OW > DATA_W || IW < 1 || OW < 1)
    begin : g_bad_shape
      $error("pixie_vcgra: level %0d has an illegal PE count or width", l);
    end
    for (genvar p = 0; p < PE_MAX; p++) begin : g_pe
      if (p < NP) begin : g_used
        logic [OW-1:0] res;
        if (FLOAT_PE) begin : g_fp
          if (IW != OW) begin : g_bad_fp
            $error("pixie_vcgra: floating-point levels need equal input and output widths");
          end
          pe_fp #(
            .WE(IW - 29),
            .WF(26)
          ) u_pe (
            .clk,
            .rst_n,
            .op          (cfg_pe_op[l][p]),
            .a           (lvl_in[l][2*p][IW-1:0]),
            .a_valid     (lvl_in_vld[l][2*p]),
            .b           (lvl_in[l][2*p+1][IW-1:0]),
            .b_valid     (lvl_in_vld[l][2*p+1]),
            .result      (res),
            .result_valid(lvl_res_vld[l][p])
          );
        end else begin : g_fx
          pe #(
            .IN_W (IW),
            .OUT_W(OW)
          ) u_pe (
            .clk,
            .rst_n,
            .op          (cfg_pe_op[l][p]),
            .a           (lvl_in[l][2*p][IW-1:0]),
            .a_valid     (lvl_in_vld[l][2*p]),
            .b           (lvl_in[l][2*p+1][IW-1:0]),
            .b_valid     (lvl_in_vld[l][2*p+1]),
            .result      (res),
            .result_valid(lvl_res_vld[l][p])
          );
        end
        assign lvl_res[l][p] = DATA_W'(res);
      end else begin : g_unused
        assign lvl_res[l][p]     = '0;
        assign lvl_res_vld[l][p] = 1'b0;
      end
    end
  end

  // ---------------------------------------- virtual channels between levels
  for (genvar k = 0; k < NUM_LEVELS - 1; k++) begin : g_vc
    localparam int unsigned NI  = int'(LEVEL_PES[k]);
    localparam int unsigned NO  = 2 * int'(LEVEL_PES[k+1]);
    localparam int unsigned SW  = sel_width(NI);
    localparam int unsigned OW  = int'(LEVEL_IN_W[k+1]);
    logic [SW-1:0]     sel      [NO];
    logic [DATA_W-1:0] in_data  [NI];
    logic [NI-1:0]     in_vld;
    logic [OW-1:0]     out_data [NO];
    logic [NO-1:0]     out_vld;
    for (genvar i = 0; i < NI; i++) begin : g_i
      assign in_data[i] = lvl_res[k][i];
      assign in_vld[i]  = lvl_res_vld[k][i];
    end
    for (genvar j = 0; j < NO; j++) begin : g_s
      assign sel[j] = cfg_vc_sel[k][j][SW-1:0];
    end
    vc #(
      .NUM_IN   (NI),
      .NUM_OUT  (NO),
      .PORT_W   (DATA_W),
      .IN_WIDTHS({NI{LEVEL_OUT_W[k]}}),
      .OUT_W    (OW)
    ) u_vc (
      .clk,
      .rst_n,
      .sel,
      .in_data,
      .in_valid (in_vld),
      .out_data,
      .out_valid(out_vld)
    );
    for (genvar j = 0; j < 2 * PE_MAX; j++) begin : g_conn
      if (j < NO) begin : g_used
        assign lvl_in[k+1][j]     = DATA_W'(out_data[j]);
        assign lvl_in_vld[k+1][j] = out_vld[j];
      end else begin : g_unused
        assign lvl_in[k+1][j]     = '0;
        assign lvl_in_vld[k+1][j] = 1'b0;
      end
    end
  end

  // --------------------------------------------------------------- data out
  localparam int unsigned PL  = int'(LEVEL_PES[NUM_LEVELS-1]);
  localparam int unsigned OWL = int'(LEVEL_OUT_W[NUM_LEVELS-1]);
  begin : g_dout
    localparam int unsigned SW = sel_width(PL);
    logic [SW-1:0]  sel  [NUM_MEM_OUT];
    logic [OWL-1:0] data [PL];
    for (genvar r = 0; r < NUM_MEM_OUT; r++) begin : g_sel
      assign sel[r] = cfg_out_sel[r][SW-1:0];
    end
    for (genvar i = 0; i < PL; i++) begin : g_i
      assign data[i] = lvl_res[NUM_LEVELS-1][i][OWL-1:0];
    end
    data_out_channel #(
      .NUM_IN (PL),
      .IN_W   (OWL),
      .NUM_OUT(NUM_MEM_OUT),
      .OUT_W  (MEM_W)
    ) u_dout (
      .clk,
      .rst_n,
      .sel,
      .out_en   (cfg_out_en),
      .in_data  (data),
      .in_valid (lvl_res_vld[NUM_LEVELS-1][PL-1:0]),
      .fetch,
      .res_data (mem_out),
      .res_valid(mem_out_valid),
      .done
    );
  end

endmodule
