// End-to-end testbench of the Pixie grid at its default size (5 levels of 9
// fixed-point PEs, 16-bit data, 18 memory words in, 9 results out).
//
// Phase 1, edge detection: the grid is configured as in the edge-detection
// mapping (level 1: nine MUL; level 2: four ADD and one BUF; level 3: two
// ADD and one BUF; level 4: one ADD and one BUF; level 5: one ADD; all other
// PEs NONE). A random 10 x 10 grey-scale image is filtered with the
// horizontal and then the vertical Sobel kernel. For every interior pixel
// the 9 pixels under the mask and the 9 coefficients are written to the
// memory words and start is pulsed, one pixel every 3 cycles, so many pixels
// are in flight at once. Each result is compared with a direct convolution
// computed here, and the time of the last result is checked against the
// 3-cycle issue rate plus the 23-cycle latency.
// Phase 2, single operation: one pixel is sent alone; done must rise 23
// cycles after start, hold, and clear on fetch.
// Phase 3, two copies of a small graph ((x - y) * (z + w) > (z + w), the
// overview example) side by side, plus a DIV and an EQU PE, with every
// value buffered down the unused levels to the data-out channel; done must
// wait for all four results.
// Mechanism counters (each must be non-zero): every operation firing,
// pipelined overlap, done, fetch, channel fan-out (BUF inputs), graph copies
// in parallel, and buffering across levels. A PE set to NONE must never fire.
module tb_pixie_vcgra;
  import pixie_pkg::*;

  localparam int L = 5, P = 9, NM = 18, NR = 9;
  localparam int LATENCY = 4 * L + 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [4:0]   cfg_in_sel  [2*P];
  pe_op_e       cfg_pe_op   [L][P];
  logic [3:0]   cfg_vc_sel  [L-1][2*P];
  logic [3:0]   cfg_out_sel [NR];
  logic [NR-1:0] cfg_out_en;
  logic         start, fetch, done;
  logic [15:0]  mem_in  [NM];
  logic [15:0]  mem_out [NR];
  logic [NR-1:0] mem_out_valid;

  pixie_vcgra dut (
    .clk, .rst_n, .cfg_in_sel, .cfg_pe_op, .cfg_vc_sel, .cfg_out_sel, .cfg_out_en,
    .start, .mem_in, .mem_out, .mem_out_valid, .done, .fetch);

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ mechanisms
  int fired [8];          // per operation code
  int none_fired = 0, overlap = 0, done_seen = 0, fetches = 0, fanout = 0;
  int copies = 0, buffered = 0, in_flight = 0;
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < L; l++)
      for (int p = 0; p < P; p++)
        if (dut.lvl_res_vld[l][p]) begin
          fired[int'(cfg_pe_op[l][p])]++;
          if (cfg_pe_op[l][p] == OP_NONE) none_fired++;
          if (cfg_pe_op[l][p] == OP_BUF && l > 0 &&
              cfg_vc_sel[l-1][2*p] == cfg_vc_sel[l-1][2*p+1]) fanout++;
          if (cfg_pe_op[l][p] == OP_BUF && l >= 2) buffered++;
        end
    if (start && in_flight > 0) overlap++;
    if (start) in_flight++;
    if (mem_out_valid[0]) in_flight--;
    if (done && !$past(done)) done_seen++;
    if (fetch) fetches++;
  end

  // ------------------------------------------------------------ configuration
  task automatic clear_cfg();
    foreach (cfg_in_sel[j]) cfg_in_sel[j] = '0;
    foreach (cfg_pe_op[l, p]) cfg_pe_op[l][p] = OP_NONE;
    foreach (cfg_vc_sel[k, j]) cfg_vc_sel[k][j] = '0;
    foreach (cfg_out_sel[r]) cfg_out_sel[r] = '0;
    cfg_out_en = '0;
  endtask

  // PE p of level l takes operand a from predecessor x and b from y
  task automatic route(int l, int p, pe_op_e o, int x, int y);
    cfg_pe_op[l][p] = o;
    if (l == 0) begin
      cfg_in_sel[2*p]   = 5'(x);
      cfg_in_sel[2*p+1] = 5'(y);
    end else begin
      cfg_vc_sel[l-1][2*p]   = 4'(x);
      cfg_vc_sel[l-1][2*p+1] = 4'(y);
    end
  endtask

  task automatic cfg_sobel();
    clear_cfg();
    for (int k = 0; k < 9; k++) route(0, k, OP_MUL, k, 9 + k);
    route(1, 1, OP_ADD, 0, 1); route(1, 3, OP_ADD, 2, 3);
    route(1, 5, OP_ADD, 4, 5); route(1, 7, OP_ADD, 6, 7);
    route(1, 8, OP_BUF, 8, 8);
    route(2, 2, OP_ADD, 1, 3); route(2, 6, OP_ADD, 5, 7); route(2, 8, OP_BUF, 8, 8);
    route(3, 4, OP_ADD, 2, 6); route(3, 8, OP_BUF, 8, 8);
    route(4, 6, OP_ADD, 4, 8);
    cfg_out_sel[0] = 4'd6;
    cfg_out_en     = 9'b1;
  endtask

  // ------------------------------------------------------------ image
  localparam int H = 10, WD = 10;
  int img [H][WD];
  int gx [3][3] = '{'{-1, 0, 1}, '{-2, 0, 2}, '{-1, 0, 1}};
  int gy [3][3] = '{'{-1, -2, -1}, '{0, 0, 0}, '{1, 2, 1}};

  // Direct form of the edge-detection loop: sum over j, i of
  // sobel[1+j][1+i] * pixel[y-j][x-i].
  function automatic int conv(int k [3][3], int y, int x);
    int sum = 0;
    for (int j = -1; j <= 1; j++)
      for (int i = -1; i <= 1; i++)
        sum += k[1+j][1+i] * img[y-j][x-i];
    return sum;
  endfunction

  int expq [$];
  int got_results = 0;
  longint last_result_cycle;
  always @(posedge clk) if (rst_n && mem_out_valid[0] && expq.size() > 0) begin
    int e;
    e = expq.pop_front();
    checks++;
    if ($signed(mem_out[0]) != 16'(e)) begin
      failures++;
      $display("FAIL result %0d got %0d exp %0d", got_results, $signed(mem_out[0]), e);
    end
    got_results++;
    last_result_cycle = cycle;
  end

  task automatic filter(int k [3][3]);
    longint first_start;
    int n = 0;
    for (int y = 1; y < H - 1; y++)
      for (int x = 1; x < WD - 1; x++) begin
        for (int j = -1; j <= 1; j++)
          for (int i = -1; i <= 1; i++) begin
            mem_in[3*(j+1) + (i+1)]     = 16'(img[y-j][x-i]);
            mem_in[9 + 3*(j+1) + (i+1)] = 16'(k[1+j][1+i]);
          end
        expq.push_back(conv(k, y, x));
        start = 1;
        if (n == 0) first_start = cycle;
        @(posedge clk); #1 start = 0;
        foreach (mem_in[m]) mem_in[m] = 16'($urandom);   // words are sampled only with start
        repeat (2) @(posedge clk);
        #1 n++;
      end
    while (expq.size() > 0 && cycle < first_start + 3 * n + 100) @(posedge clk);
    #1;
    check("all results returned", expq.size() == 0);
    check($sformatf("pipelined rate: last result at +%0d, expected +%0d",
                    last_result_cycle - first_start, 3 * (n - 1) + LATENCY),
          last_result_cycle - first_start == longint'(3 * (n - 1) + LATENCY));
    fetch = 1; @(posedge clk); #1 fetch = 0;
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    foreach (fired[o]) fired[o] = 0;
    start = 0; fetch = 0;
    foreach (mem_in[m]) mem_in[m] = '0;
    foreach (img[y, x]) img[y][x] = int'($urandom % 256);
    clear_cfg();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);

    // ---- phase 1: edge detection, both kernels, pipelined
    cfg_sobel();
    @(posedge clk); #1;
    filter(gx);
    filter(gy);

    // ---- phase 2: one pixel alone, done and fetch
    for (int j = -1; j <= 1; j++)
      for (int i = -1; i <= 1; i++) begin
        mem_in[3*(j+1) + (i+1)]     = 16'(img[5-j][5-i]);
        mem_in[9 + 3*(j+1) + (i+1)] = 16'(gx[1+j][1+i]);
      end
    expq.push_back(conv(gx, 5, 5));
    start = 1; t0 = cycle;
    @(posedge clk); #1 start = 0;
    while (!done && cycle < t0 + 100) @(posedge clk);
    #1;
    check($sformatf("latency start->done %0d", cycle - t0), cycle - t0 == LATENCY + 1);
    check("result", mem_out[0] == 16'(conv(gx, 5, 5)) && expq.size() == 0);
    repeat (5) @(posedge clk);
    #1 check("done holds", done);
    fetch = 1; @(posedge clk); #1 fetch = 0;
    check("fetch clears done", !done);

    // ---- phase 3: two copies of the overview graph, plus DIV and EQU
    clear_cfg();
    route(0, 0, OP_SUB, 0, 1);  route(0, 1, OP_ADD, 2, 3);
    route(0, 2, OP_SUB, 4, 5);  route(0, 3, OP_ADD, 6, 7);
    route(0, 4, OP_DIV, 8, 9);  route(0, 5, OP_EQU, 10, 11);
    route(1, 0, OP_MUL, 0, 1);  route(1, 1, OP_BUF, 1, 1);
    route(1, 2, OP_MUL, 2, 3);  route(1, 3, OP_BUF, 3, 3);
    route(1, 4, OP_BUF, 4, 4);  route(1, 5, OP_BUF, 5, 5);
    route(2, 1, OP_GRE, 0, 1);  route(2, 3, OP_GRE, 2, 3);
    route(2, 4, OP_BUF, 4, 4);  route(2, 5, OP_BUF, 5, 5);
    for (int l = 3; l < L; l++) begin
      route(l, 1, OP_BUF, 1, 1); route(l, 3, OP_BUF, 3, 3);
      route(l, 4, OP_BUF, 4, 4); route(l, 5, OP_BUF, 5, 5);
    end
    cfg_out_sel[0] = 4'd1; cfg_out_sel[1] = 4'd3; cfg_out_sel[2] = 4'd4; cfg_out_sel[3] = 4'd5;
    cfg_out_en = 9'b0_0000_1111;
    @(posedge clk);
    for (int n = 0; n < 40; n++) begin
      int v [12];
      int e0, e1, e2, e3;
      for (int m = 0; m < 12; m++) v[m] = int'($urandom % 41) - 20;
      if (n % 4 == 0) v[11] = v[10];
      if (n % 5 == 0) v[9] = 0;
      #1;
      for (int m = 0; m < 12; m++) mem_in[m] = 16'(v[m]);
      e0 = ((v[0] - v[1]) * (v[2] + v[3]) > (v[2] + v[3])) ? 1 : 0;
      e1 = ((v[4] - v[5]) * (v[6] + v[7]) > (v[6] + v[7])) ? 1 : 0;
      e2 = (v[9] == 0) ? -1 : v[8] / v[9];
      e3 = (v[10] == v[11]) ? 1 : 0;
      start = 1; t0 = cycle;
      @(posedge clk); #1 start = 0;
      while (!done && cycle < t0 + 100) @(posedge clk);
      #1;
      check($sformatf("graph latency %0d", cycle - t0), cycle - t0 == LATENCY + 1);
      check($sformatf("copy 0: %0d exp %0d", $signed(mem_out[0]), e0), $signed(mem_out[0]) == 16'(e0));
      check($sformatf("copy 1: %0d exp %0d", $signed(mem_out[1]), e1), $signed(mem_out[1]) == 16'(e1));
      check($sformatf("div: %0d exp %0d", $signed(mem_out[2]), e2), $signed(mem_out[2]) == 16'(e2));
      check($sformatf("equ: %0d exp %0d", $signed(mem_out[3]), e3), $signed(mem_out[3]) == 16'(e3));
      if (done && $signed(mem_out[0]) == 16'(e0) && $signed(mem_out[1]) == 16'(e1)) copies++;
      fetch = 1; @(posedge clk); #1 fetch = 0;
    end

    // ---- mechanisms
    check("ADD fired", fired[OP_ADD] > 0);
    check("SUB fired", fired[OP_SUB] > 0);
    check("MUL fired", fired[OP_MUL] > 0);
    check("DIV fired", fired[OP_DIV] > 0);
    check("GRE fired", fired[OP_GRE] > 0);
    check("EQU fired", fired[OP_EQU] > 0);
    check("BUF fired", fired[OP_BUF] > 0);
    check("NONE never fired", none_fired == 0);
    check("pipelined overlap", overlap > 0);
    check("done raised", done_seen > 0);
    check("fetch issued", fetches > 0);
    check("channel fan-out", fanout > 0);
    check("graph copies in parallel", copies > 0);
    check("buffering across levels", buffered > 0);
    $display("fired ADD %0d SUB %0d MUL %0d DIV %0d GRE %0d EQU %0d BUF %0d NONE %0d",
             fired[OP_ADD], fired[OP_SUB], fired[OP_MUL], fired[OP_DIV], fired[OP_GRE],
             fired[OP_EQU], fired[OP_BUF], none_fired);
    $display("overlap %0d done %0d fetch %0d fanout %0d copies %0d buffered %0d",
             overlap, done_seen, fetches, fanout, copies, buffered);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
