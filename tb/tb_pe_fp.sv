// Self-checking testbench of the floating-point PE (6-bit exponent, 26-bit
// fraction).
//
// The reference is written independently of the RTL: it turns each operand
// into an exact integer times a power of two, adds or multiplies exactly in
// 128-bit integers, and rounds to nearest-even by comparing the dropped part
// with one half. A few directed cases are also checked against values worked
// out with real arithmetic (1.5*2 = 3, 0.75+0.25 = 1, ...). Random operands
// cover near and far exponents, both signs, cancellation, overflow to
// infinity, underflow to zero and the special values. Latency (2 cycles to
// result_valid) and the one-cycle valid are checked on every operation.
module tb_pe_fp;
  import pixie_pkg::*;
  localparam int WE = 6, WF = 26, W = 35, BIAS = 31;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pe_op_e       op;
  logic [W-1:0] a, b, r;
  logic         av, bv, rv;

  pe_fp dut (.clk, .rst_n, .op, .a, .a_valid(av), .b, .b_valid(bv), .result(r), .result_valid(rv));

  function automatic logic [W-1:0] mk(logic [1:0] exn, bit s, int e, logic [WF-1:0] f);
    return {exn, s, WE'(e), f};
  endfunction

  // value = mag * 2^(base - BIAS), rounded to nearest even
  function automatic logic [W-1:0] ref_round(bit s, logic [127:0] mag, int base);
    int h, eb, sh;
    logic [127:0] kept, rem, half;
    if (mag == 0) return mk(2'b00, 0, 0, 0);
    h = 0;
    for (int k = 0; k < 128; k++) if (mag[k]) h = k;
    eb = h + base;
    if (h > WF) begin
      sh   = h - WF;
      kept = mag >> sh;
      rem  = mag - (kept << sh);
      half = 128'(1) << (sh - 1);
      if (rem > half || (rem == half && kept[0])) kept = kept + 1;
      if (kept[WF+1]) begin kept = kept >> 1; eb++; end
    end else begin
      kept = mag << (WF - h);
    end
    if (eb > 63) return mk(2'b10, s, 0, 0);
    if (eb < 0)  return mk(2'b00, s, 0, 0);
    return mk(2'b01, s, eb, kept[WF-1:0]);
  endfunction

  function automatic logic [W-1:0] ref_op(pe_op_e o, logic [W-1:0] x, logic [W-1:0] y);
    logic [1:0] xe = x[W-1:W-2], ye = y[W-1:W-2];
    bit xs = x[W-3], ys = y[W-3];
    int xx = int'(x[WF+WE-1:WF]), yx = int'(y[WF+WE-1:WF]);
    logic [127:0] xm = {101'b0, 1'b1, x[WF-1:0]}, ym = {101'b0, 1'b1, y[WF-1:0]};
    if (o == OP_BUF) return x;
    if (xe == 2'b11 || ye == 2'b11) return mk(2'b11, 0, 0, 0);
    if (o == OP_MUL) begin
      if ((xe == 2'b10 && ye == 2'b00) || (xe == 2'b00 && ye == 2'b10)) return mk(2'b11, 0, 0, 0);
      if (xe == 2'b10 || ye == 2'b10) return mk(2'b10, xs ^ ys, 0, 0);
      if (xe == 2'b00 || ye == 2'b00) return mk(2'b00, xs ^ ys, 0, 0);
      return ref_round(xs ^ ys, xm * ym, xx + yx - BIAS - 2 * WF);
    end else begin
      int emin;
      logic [127:0] xa, ya, mag;
      bit s;
      if (xe == 2'b10 && ye == 2'b10) return (xs == ys) ? x : mk(2'b11, 0, 0, 0);
      if (xe == 2'b10) return x;
      if (ye == 2'b10) return y;
      if (xe == 2'b00 && ye == 2'b00) return mk(2'b00, xs & ys, 0, 0);
      if (xe == 2'b00) return y;
      if (ye == 2'b00) return x;
      emin = (xx < yx) ? xx : yx;
      xa = xm << (xx - emin);
      ya = ym << (yx - emin);
      if (xs == ys) begin mag = xa + ya; s = xs; end
      else if (xa >= ya) begin mag = xa - ya; s = xs; end
      else begin mag = ya - xa; s = ys; end
      if (mag == 0) return mk(2'b00, 0, 0, 0);
      return ref_round(s, mag, emin - WF);
    end
  endfunction

  function automatic real to_real(logic [W-1:0] x);
    real m, v;
    int  ex;
    m  = 1.0 + real'(x[WF-1:0]) / real'(64'(1) << WF);
    ex = int'(x[WF+WE-1:WF]) - BIAS;
    v  = m;
    for (int k = 0; k < ex; k++) v = v * 2.0;
    for (int k = 0; k > ex; k--) v = v / 2.0;
    if (x[W-1:W-2] == 2'b00) v = 0.0;
    return x[W-3] ? -v : v;
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run_one(pe_op_e o, logic [W-1:0] x, logic [W-1:0] y, output logic [W-1:0] got);
    int lat;
    logic [W-1:0] e;
    op = o; a = x; b = y; av = 1; bv = 1;
    @(posedge clk); #1 av = 0; bv = 0; a = '0; b = '0;
    lat = 1;
    while (!rv && lat < 10) begin @(posedge clk); #1 lat++; end
    got = r;
    e = ref_op(o, x, y);
    check($sformatf("%s latency %0d", o.name(), lat), lat == 2);
    check($sformatf("%s %h %h -> %h exp %h", o.name(), x, y, r, e), r == e);
    @(posedge clk); #1 check("one-cycle valid", !rv);
  endtask

  function automatic logic [W-1:0] rnd_fp(int spread);
    int ex = 31 + int'($urandom % (2 * spread + 1)) - spread;
    if (ex < 0) ex = 0;
    if (ex > 63) ex = 63;
    return mk(2'b01, 1'($urandom), ex, WF'($urandom));
  endfunction

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] got, one5, two, q75, q25;
    op = OP_NONE; a = 0; b = 0; av = 0; bv = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // directed, checked with real arithmetic
    one5 = mk(2'b01, 0, BIAS, 26'h2000000);     // 1.5
    two  = mk(2'b01, 0, BIAS + 1, 0);           // 2.0
    q75  = mk(2'b01, 0, BIAS - 1, 26'h2000000); // 0.75
    q25  = mk(2'b01, 0, BIAS - 2, 0);           // 0.25
    run_one(OP_MUL, one5, two, got);  check("1.5*2=3", to_real(got) == 3.0);
    run_one(OP_ADD, q75, q25, got);   check("0.75+0.25=1", to_real(got) == 1.0);
    run_one(OP_ADD, one5, {q75[W-1:W-2], 1'b1, q75[W-4:0]}, got); check("1.5-0.75=0.75", to_real(got) == 0.75);
    run_one(OP_ADD, two, {two[W-1:W-2], 1'b1, two[W-4:0]}, got);  check("2-2=+0", got == 0);
    run_one(OP_MUL, mk(2'b01, 0, 62, 0), mk(2'b01, 0, 40, 0), got); check("overflow to inf", got[W-1:W-2] == 2'b10);
    run_one(OP_MUL, mk(2'b01, 1, 3, 0), mk(2'b01, 0, 5, 0), got);   check("underflow to zero", got[W-1:W-2] == 2'b00);
    run_one(OP_MUL, mk(2'b10, 0, 0, 0), mk(2'b00, 0, 0, 0), got);   check("inf*0=NaN", got[W-1:W-2] == 2'b11);
    run_one(OP_BUF, one5, one5, got); check("buffer", got == one5);
    // random
    for (int n = 0; n < 3000; n++) begin
      logic [W-1:0] x, y;
      int spread;
      spread = (n % 4 == 0) ? 31 : (n % 4 == 1) ? 2 : 12;
      x = rnd_fp(spread);
      y = rnd_fp(spread);
      if (n % 50 == 0) y[W-1:W-2] = 2'($urandom);   // special values
      if (n % 7 == 0) y = {x[W-1:W-2], ~x[W-3], x[W-4:0] ^ (W-3)'($urandom % 4)}; // cancellation
      run_one((n % 2) ? OP_ADD : OP_MUL, x, y, got);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
