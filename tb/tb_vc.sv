// Self-checking testbench of the virtual channel.
//
// A channel with three predecessors of different widths (8, 12 and 16 bits,
// the A, B, C of the channel figure) and five outputs is driven with random
// words, random valid bits and a random select per output that changes every
// few cycles (select value 3 is out of range and must give zero, no valid).
// A second channel narrows 16-bit inputs to 8-bit outputs. Every cycle the
// outputs are compared with the inputs of two cycles earlier, sign-extended
// and cut by the testbench itself. Fan-out of one input to several outputs
// is counted and must occur.
module tb_vc;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fanouts = 0;

  localparam int NI = 3, NO = 5;
  logic [1:0]  sel  [NO];
  logic [15:0] din  [NI];
  logic [NI-1:0] vin;
  logic [15:0] dout [NO];
  logic [NO-1:0] vout;
  logic [7:0]  dout8 [NO];
  logic [NO-1:0] vout8;

  vc #(.NUM_IN(NI), .NUM_OUT(NO), .PORT_W(16), .IN_WIDTHS({8'd16, 8'd12, 8'd8}), .OUT_W(16))
    dut (.clk, .rst_n, .sel, .in_data(din), .in_valid(vin), .out_data(dout), .out_valid(vout));
  vc #(.NUM_IN(NI), .NUM_OUT(NO), .PORT_W(16), .IN_WIDTHS({NI{8'd16}}), .OUT_W(8))
    dut8 (.clk, .rst_n, .sel, .in_data(din), .in_valid(vin), .out_data(dout8), .out_valid(vout8));

  // history of what was applied, index 0 = last cycle
  logic [15:0]   hd [2][NI];
  logic [NI-1:0] hv [2];

  function automatic logic [15:0] sext(logic [15:0] x, int w);
    logic [15:0] y = x;
    for (int k = w; k < 16; k++) y[k] = x[w-1];
    return y;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int widths [NI] = '{8, 12, 16};
    foreach (sel[j]) sel[j] = 0;
    foreach (din[i]) din[i] = 0;
    vin = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      // apply new stimulus just after the edge
      if (cyc % 7 == 0) foreach (sel[j]) sel[j] = 2'($urandom % 4);
      foreach (din[i]) din[i] = 16'($urandom);
      vin = NI'($urandom);
      @(posedge clk);
      #1;
      hd[1] = hd[0]; hv[1] = hv[0];
      // hd[0] is the stimulus sampled at the edge just taken
      foreach (din[i]) hd[0][i] = din[i];
      hv[0] = vin;
      if (cyc >= 2) begin
        // outputs now reflect the stimulus of two edges ago (hd[1]) routed
        // with the select that was applied at the same time as hd[0]
        for (int j = 0; j < NO; j++) begin
          logic [15:0] e; logic ev;
          if (sel_d[j] < NI) begin
            e  = sext(hd[1][sel_d[j]], widths[sel_d[j]]);
            ev = hv[1][sel_d[j]];
          end else begin
            e = 0; ev = 0;
          end
          checks++;
          if (dout[j] !== e || vout[j] !== ev) begin
            failures++;
            $display("FAIL cyc %0d out %0d sel %0d got %h/%b exp %h/%b", cyc, j, sel_d[j], dout[j], vout[j], e, ev);
          end
          checks++;
          if (dout8[j] !== ((sel_d[j] < NI) ? hd[1][sel_d[j]][7:0] : 8'h0) || vout8[j] !== ev) begin
            failures++;
            $display("FAIL narrow cyc %0d out %0d", cyc, j);
          end
        end
        for (int j = 0; j < NO; j++)
          for (int k = j + 1; k < NO; k++)
            if (sel_d[j] == sel_d[k] && sel_d[j] < NI && ev_any(hv[1], sel_d[j])) fanouts++;
      end
    end
    checks++;
    if (fanouts == 0) begin
      failures++;
      $display("FAIL fan-out never exercised");
    end
    $display("fan-out events: %0d", fanouts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit ev_any(logic [NI-1:0] v, int i);
    return v[i];
  endfunction

  // select seen by the multiplexers in the cycle the output register loaded
  int sel_d [NO];
  always @(posedge clk) foreach (sel[j]) sel_d[j] <= int'(sel[j]);
endmodule
