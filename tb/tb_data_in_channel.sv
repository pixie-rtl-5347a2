// Self-checking testbench of the data-in channel.
//
// Random memory words are presented every cycle and start is pulsed at random.
// Two cycles after each edge, every output must carry the word its select
// named and a valid equal to the start value of that edge; the routing is
// reconfigured every few cycles. The number of start pulses seen is checked.
module tb_data_in_channel;
  import pixie_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, starts = 0;

  localparam int NM = 18, NO = 18, SW = 5;
  logic          start;
  logic [SW-1:0] sel [NO];
  logic [15:0]   mem [NM];
  logic [15:0]   od  [NO];
  logic [NO-1:0] ov;

  data_in_channel dut (.clk, .rst_n, .start, .sel, .mem_data(mem), .out_data(od), .out_valid(ov));

  logic [15:0] hm [2][NM];
  logic        hs [2];
  int          sel_d [NO];
  always @(posedge clk) foreach (sel[j]) sel_d[j] <= int'(sel[j]);

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0;
    foreach (sel[j]) sel[j] = 0;
    foreach (mem[i]) mem[i] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 1000; cyc++) begin
      if (cyc % 5 == 0) foreach (sel[j]) sel[j] = SW'($urandom % NM);
      foreach (mem[i]) mem[i] = 16'($urandom);
      start = ($urandom % 3 == 0);
      @(posedge clk);
      #1;
      hm[1] = hm[0]; hs[1] = hs[0];
      hm[0] = mem;   hs[0] = start;
      if (cyc >= 2) begin
        for (int j = 0; j < NO; j++) begin
          checks++;
          if (od[j] !== hm[1][sel_d[j]] || ov[j] !== hs[1]) begin
            failures++;
            $display("FAIL cyc %0d out %0d got %h/%b exp %h/%b", cyc, j, od[j], ov[j], hm[1][sel_d[j]], hs[1]);
          end
        end
        if (hs[1]) starts++;
      end
    end
    checks++;
    if (starts < 100) begin
      failures++;
      $display("FAIL too few starts %0d", starts);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
