// Self-checking testbench of the data-out channel.
//
// Nine last-level PEs send valid pulses with random words at random times.
// Four results are configured (one of them disabled) with random selects. The
// test checks each held result word and its one-cycle res_valid three cycles
// after the PE's valid, that done rises exactly when every enabled result has
// arrived (never earlier), that it stays high, and that fetch clears it.
module tb_data_out_channel;
  import pixie_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, rounds_done = 0;

  localparam int NI = 9, NO = 4, SW = 4;
  logic [SW-1:0] sel [NO];
  logic [NO-1:0] en;
  logic [15:0]   din [NI];
  logic [NI-1:0] vin;
  logic          fetch;
  logic [15:0]   rd [NO];
  logic [NO-1:0] rv;
  logic          done;

  data_out_channel #(.NUM_IN(NI), .IN_W(16), .NUM_OUT(NO), .OUT_W(16)) dut (
    .clk, .rst_n, .sel, .out_en(en), .in_data(din), .in_valid(vin), .fetch,
    .res_data(rd), .res_valid(rv), .done);

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fetch = 0; vin = 0; en = 0;
    foreach (din[i]) din[i] = 0;
    foreach (sel[j]) sel[j] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 100; round++) begin
      logic [15:0] word [NI];
      bit          fired [NI];
      bit          exp_arr [NO];
      logic [15:0] exp_d [NO];
      foreach (sel[j]) sel[j] = SW'($urandom % NI);
      en = NO'($urandom) | 4'b0001;
      foreach (word[i]) word[i] = 16'($urandom);
      foreach (fired[i]) fired[i] = 0;
      foreach (exp_arr[j]) exp_arr[j] = 0;
      // fire the PEs one at a time in random order, watch done
      for (int step = 0; step < NI; step++) begin
        int i;
        do i = $urandom % NI; while (fired[i]);
        fired[i] = 1;
        din[i] = word[i];
        vin = 0; vin[i] = 1;
        @(posedge clk); #1 vin = 0; din[i] = 16'($urandom);
        @(posedge clk); #1;
        check("no early res_valid", rv == 0);
        @(posedge clk); #1;
        for (int j = 0; j < NO; j++) begin
          bit hit;
          hit = en[j] && (sel[j] == SW'(i));
          check($sformatf("res_valid %0d got %b en %b sel %p i %0d", j, rv, en, sel, i), rv[j] == hit);
          if (hit) begin
            exp_arr[j] = 1;
            check($sformatf("res_data %0d", j), rd[j] == word[i]);
          end
        end
        begin
          bit all;
          all = 1;
          for (int j = 0; j < NO; j++) if (en[j] && !exp_arr[j]) all = 0;
          check($sformatf("done round %0d step %0d got %b exp %b en %b sel %p i %0d", round, step, done, all, en, sel, i), done == all);
        end
        @(posedge clk); #1;
        check("res_valid is one cycle", rv == 0);
      end
      // all PEs fired: every enabled result has arrived
      check("done after all", done);
      if (done) rounds_done++;
      repeat (2) @(posedge clk);
      #1 check("done stays", done);
      fetch = 1;
      @(posedge clk); #1 fetch = 0;
      check("fetch clears done", !done);
    end
    check("rounds completed", rounds_done == 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
