// End-to-end testbench of two other grid shapes the design supports.
//
// Grid A, inverted triangle with mixed widths: 3 levels of 4, 2 and 1 PEs
// computing a 4-term dot product of signed 8-bit values. The data-in channel
// narrows the 20-bit memory words to the 8-bit inputs of level 1, whose MUL
// PEs widen to 16 bits; the level-2 ADD PEs stay at 16 bits; the channel to
// level 3 sign-extends to 18 bits and the last ADD writes 20 bits.
// Grid B, floating point: 2 levels (2 PEs, then 1) of floating-point PEs in
// the 35-bit format (6-bit exponent, 26-bit fraction) computing
// x*y + z*w on small integers and halves, whose results are exact, checked
// with real arithmetic.
// Grid C, the 4 x 4 grid shape: two copies of the overview graph
// (x - y) * (z + w) > (z + w) side by side in levels 1-3 (SUB/ADD, MUL/BUF,
// NONE/GRE), carried through level 4 by BUF PEs, both results awaited.
// All grids get operand sets back to back (one every 3 cycles) and one alone
// to check done; the number of width conversions and floating-point results
// is counted and must be non-zero.
module tb_pixie_vcgra_variants;
  import pixie_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- grid A
  logic [2:0]  a_in_sel  [8];
  pe_op_e      a_op      [3][4];
  logic [1:0]  a_vc_sel  [2][8];
  logic [1:0]  a_out_sel [1];
  logic [0:0]  a_out_en;
  logic        a_start, a_fetch, a_done;
  logic [19:0] a_mem_in  [8];
  logic [19:0] a_mem_out [1];
  logic [0:0]  a_out_vld;

  pixie_vcgra #(
    .NUM_LEVELS (3),
    .PE_MAX     (4),
    .LEVEL_PES  ({8'd1, 8'd2, 8'd4}),
    .DATA_W     (20),
    .LEVEL_IN_W ({8'd18, 8'd16, 8'd8}),
    .LEVEL_OUT_W({8'd20, 8'd16, 8'd16}),
    .NUM_MEM_IN (8),
    .MEM_W      (20),
    .NUM_MEM_OUT(1)
  ) grid_a (
    .clk, .rst_n, .cfg_in_sel(a_in_sel), .cfg_pe_op(a_op), .cfg_vc_sel(a_vc_sel),
    .cfg_out_sel(a_out_sel), .cfg_out_en(a_out_en), .start(a_start), .mem_in(a_mem_in),
    .mem_out(a_mem_out), .mem_out_valid(a_out_vld), .done(a_done), .fetch(a_fetch));

  // ---------------------------------------------------------------- grid B
  localparam int FW = 35, BIAS = 31;
  logic [1:0]    b_in_sel  [4];
  pe_op_e        b_op      [2][2];
  logic [0:0]    b_vc_sel  [1][4];
  logic [0:0]    b_out_sel [1];
  logic [0:0]    b_out_en;
  logic          b_start, b_fetch, b_done;
  logic [FW-1:0] b_mem_in  [4];
  logic [FW-1:0] b_mem_out [1];
  logic [0:0]    b_out_vld;

  pixie_vcgra #(
    .NUM_LEVELS (2),
    .PE_MAX     (2),
    .LEVEL_PES  ({8'd1, 8'd2}),
    .DATA_W     (FW),
    .NUM_MEM_IN (4),
    .MEM_W      (FW),
    .NUM_MEM_OUT(1),
    .FLOAT_PE   (1'b1)
  ) grid_b (
    .clk, .rst_n, .cfg_in_sel(b_in_sel), .cfg_pe_op(b_op), .cfg_vc_sel(b_vc_sel),
    .cfg_out_sel(b_out_sel), .cfg_out_en(b_out_en), .start(b_start), .mem_in(b_mem_in),
    .mem_out(b_mem_out), .mem_out_valid(b_out_vld), .done(b_done), .fetch(b_fetch));

  // ---------------------------------------------------------------- grid C
  logic [2:0]  c_in_sel  [8];
  pe_op_e      c_op      [4][4];
  logic [1:0]  c_vc_sel  [3][8];
  logic [1:0]  c_out_sel [2];
  logic [1:0]  c_out_en;
  logic        c_start, c_fetch, c_done;
  logic [15:0] c_mem_in  [8];
  logic [15:0] c_mem_out [2];
  logic [1:0]  c_out_vld;

  pixie_vcgra #(
    .NUM_LEVELS (4),
    .PE_MAX     (4),
    .NUM_MEM_IN (8),
    .NUM_MEM_OUT(2)
  ) grid_c (
    .clk, .rst_n, .cfg_in_sel(c_in_sel), .cfg_pe_op(c_op), .cfg_vc_sel(c_vc_sel),
    .cfg_out_sel(c_out_sel), .cfg_out_en(c_out_en), .start(c_start), .mem_in(c_mem_in),
    .mem_out(c_mem_out), .mem_out_valid(c_out_vld), .done(c_done), .fetch(c_fetch));

  task automatic c_route(int l, int p, pe_op_e o, int x, int y);
    c_op[l][p] = o;
    if (l == 0) begin
      c_in_sel[2*p] = 3'(x); c_in_sel[2*p+1] = 3'(y);
    end else begin
      c_vc_sel[l-1][2*p] = 2'(x); c_vc_sel[l-1][2*p+1] = 2'(y);
    end
  endtask

  // real <-> 35-bit float, for values that are exact in both
  function automatic logic [FW-1:0] to_fp(real v);
    logic s;
    int e;
    real m;
    if (v == 0.0) return '0;
    s = (v < 0.0);
    m = s ? -v : v;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    return {2'b01, s, 6'(e + BIAS), 26'(longint'((m - 1.0) * 67108864.0))};
  endfunction

  function automatic real to_real(logic [FW-1:0] x);
    real v;
    int e;
    if (x[FW-1:FW-2] != 2'b01) return 0.0;
    v = 1.0 + real'(x[25:0]) / 67108864.0;
    e = int'(x[31:26]) - BIAS;
    for (int k = 0; k < e; k++) v = v * 2.0;
    for (int k = 0; k > e; k--) v = v / 2.0;
    return x[32] ? -v : v;
  endfunction

  int widen = 0, fp_results = 0;
  always @(posedge clk) if (rst_n) begin
    // level 3 of grid A gets 16-bit words on 18-bit inputs
    if (grid_a.g_vc[1].out_vld != 0) widen++;
    if (b_out_vld[0]) fp_results++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c_exp [$];
  int c_pairs = 0;
  always @(posedge clk) if (rst_n && c_out_vld != 0) begin
    int e0, e1;
    e0 = c_exp.pop_front();
    e1 = c_exp.pop_front();
    check("4x4 grid: both copies together", c_out_vld == 2'b11);
    check($sformatf("4x4 grid copy 0: %0d exp %0d", c_mem_out[0], e0), c_mem_out[0] == 16'(e0));
    check($sformatf("4x4 grid copy 1: %0d exp %0d", c_mem_out[1], e1), c_mem_out[1] == 16'(e1));
    c_pairs++;
  end

  int a_exp [$];
  real b_exp [$];
  always @(posedge clk) if (rst_n) begin
    if (a_out_vld[0]) begin
      int e;
      e = a_exp.pop_front();
      check($sformatf("dot product %0d exp %0d", $signed(a_mem_out[0]), e), $signed(a_mem_out[0]) == 20'(e));
    end
    if (b_out_vld[0]) begin
      real e;
      e = b_exp.pop_front();
      check($sformatf("float %f exp %f", to_real(b_mem_out[0]), e), to_real(b_mem_out[0]) == e);
    end
  end

  initial begin
    int t0;
    a_start = 0; a_fetch = 0; b_start = 0; b_fetch = 0;
    foreach (a_mem_in[i]) a_mem_in[i] = '0;
    foreach (b_mem_in[i]) b_mem_in[i] = '0;
    // grid A: PE p of level 1 multiplies words p and 4+p; level 2 adds
    // pairs; level 3 adds the two sums.
    for (int p = 0; p < 4; p++) begin
      a_op[0][p] = OP_MUL; a_in_sel[2*p] = 3'(p); a_in_sel[2*p+1] = 3'(4 + p);
    end
    foreach (a_op[1][p]) a_op[1][p] = OP_NONE;
    foreach (a_op[2][p]) a_op[2][p] = OP_NONE;
    foreach (a_vc_sel[k, j]) a_vc_sel[k][j] = '0;
    a_op[1][0] = OP_ADD; a_vc_sel[0][0] = 0; a_vc_sel[0][1] = 1;
    a_op[1][1] = OP_ADD; a_vc_sel[0][2] = 2; a_vc_sel[0][3] = 3;
    a_op[2][0] = OP_ADD; a_vc_sel[1][0] = 0; a_vc_sel[1][1] = 1;
    a_out_sel[0] = 0; a_out_en = 1'b1;
    // grid B: x*y and z*w, then the sum
    b_op[0][0] = OP_MUL; b_in_sel[0] = 0; b_in_sel[1] = 1;
    b_op[0][1] = OP_MUL; b_in_sel[2] = 2; b_in_sel[3] = 3;
    b_op[1][0] = OP_ADD; b_vc_sel[0][0] = 0; b_vc_sel[0][1] = 1;
    b_op[1][1] = OP_NONE; b_vc_sel[0][2] = 0; b_vc_sel[0][3] = 0;
    b_out_sel[0] = 0; b_out_en = 1'b1;
    // grid C: the overview graph twice
    c_start = 0; c_fetch = 0;
    foreach (c_mem_in[i]) c_mem_in[i] = '0;
    foreach (c_op[l, p]) c_op[l][p] = OP_NONE;
    foreach (c_in_sel[j]) c_in_sel[j] = '0;
    foreach (c_vc_sel[k, j]) c_vc_sel[k][j] = '0;
    c_route(0, 0, OP_SUB, 0, 1); c_route(0, 1, OP_ADD, 2, 3);
    c_route(0, 2, OP_SUB, 4, 5); c_route(0, 3, OP_ADD, 6, 7);
    c_route(1, 0, OP_MUL, 0, 1); c_route(1, 1, OP_BUF, 1, 1);
    c_route(1, 2, OP_MUL, 2, 3); c_route(1, 3, OP_BUF, 3, 3);
    c_route(2, 1, OP_GRE, 0, 1); c_route(2, 3, OP_GRE, 2, 3);
    c_route(3, 1, OP_BUF, 1, 1); c_route(3, 3, OP_BUF, 3, 3);
    c_out_sel[0] = 2'd1; c_out_sel[1] = 2'd3; c_out_en = 2'b11;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    #1;
    for (int n = 0; n < 60; n++) begin
      int v [8], dot;
      real f [4];
      dot = 0;
      for (int i = 0; i < 8; i++) begin
        v[i] = int'($urandom % 256) - 128;
        a_mem_in[i] = 20'(v[i]) ^ 20'h55000;   // upper bits are cut by the data-in channel
      end
      for (int i = 0; i < 4; i++) dot += v[i] * v[4+i];
      a_exp.push_back(dot);
      for (int i = 0; i < 4; i++) begin
        f[i] = real'(int'($urandom % 201) - 100) / 2.0;
        b_mem_in[i] = to_fp(f[i]);
      end
      b_exp.push_back(f[0] * f[1] + f[2] * f[3]);
      for (int i = 0; i < 8; i++) c_mem_in[i] = 16'(v[i] % 50);
      c_exp.push_back(((v[0] % 50 - v[1] % 50) * (v[2] % 50 + v[3] % 50) > (v[2] % 50 + v[3] % 50)) ? 1 : 0);
      c_exp.push_back(((v[4] % 50 - v[5] % 50) * (v[6] % 50 + v[7] % 50) > (v[6] % 50 + v[7] % 50)) ? 1 : 0);
      a_start = 1; b_start = 1; c_start = 1;
      @(posedge clk); #1 a_start = 0; b_start = 0; c_start = 0;
      repeat (2) @(posedge clk);
      #1;
    end
    repeat (40) @(posedge clk);
    #1;
    check("grid A drained", a_exp.size() == 0);
    check("grid B drained", b_exp.size() == 0);
    check("grid C drained", c_exp.size() == 0 && c_pairs == 60);
    check("done C", c_done);
    check("done A", a_done);
    check("done B", b_done);
    a_fetch = 1; b_fetch = 1;
    @(posedge clk); #1 a_fetch = 0; b_fetch = 0;
    check("fetch clears", !a_done && !b_done);
    // one operation alone: latency 4*L+3 to the result
    a_exp.push_back(0);
    foreach (a_mem_in[i]) a_mem_in[i] = '0;
    a_start = 1; t0 = 0;
    @(posedge clk); #1 a_start = 0;
    while (!a_done && t0 < 100) begin @(posedge clk); #1 t0++; end
    check($sformatf("grid A latency %0d", t0 + 1), t0 + 1 == 4 * 3 + 3);
    check("width conversions happened", widen > 0);
    check("floating-point results", fp_results == 60);
    $display("widen %0d fp_results %0d 4x4 pairs %0d", widen, fp_results, c_pairs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
