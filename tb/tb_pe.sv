// Self-checking testbench of the processing element.
//
// Two instances: the default 16-in/16-out PE and an 8-in/16-out PE that shows
// the separate output width. For every operation, random operands are
// presented (together, or one after the other with a gap), and the test
// checks the result against a 64-bit reference model, the one-cycle valid,
// the 2-cycle latency from the last operand to result_valid, that the output
// buffer holds its value, and that a PE configured NONE never answers.
module tb_pe;
  import pixie_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  pe_op_e          op;
  logic [15:0]     a, b;
  logic            av, bv;
  logic [15:0]     r;
  logic            rv;
  logic [7:0]      a8, b8;
  logic [15:0]     r8;
  logic            rv8;

  pe #(.IN_W(16), .OUT_W(16)) dut   (.clk, .rst_n, .op, .a, .a_valid(av), .b, .b_valid(bv),
                                     .result(r), .result_valid(rv));
  pe #(.IN_W(8),  .OUT_W(16)) dut8  (.clk, .rst_n, .op, .a(a8), .a_valid(av), .b(b8), .b_valid(bv),
                                     .result(r8), .result_valid(rv8));

  function automatic longint model(pe_op_e o, longint x, longint y);
    case (o)
      OP_ADD: return x + y;
      OP_SUB: return x - y;
      OP_MUL: return x * y;
      OP_DIV: return (y == 0) ? -1 : x / y;
      OP_GRE: return (x > y) ? 1 : 0;
      OP_EQU: return (x == y) ? 1 : 0;
      OP_BUF: return x;
      default: return 0;
    endcase
  endfunction

  task automatic check(string what, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Present one operand set; gap > 0 delays b after a by that many cycles.
  // Returns the number of cycles from the last operand to result_valid.
  task automatic run_one(pe_op_e o, logic [15:0] x, logic [15:0] y, int gap);
    longint exp16, exp8;
    int lat;
    op = o;
    a = x; b = y; a8 = x[7:0]; b8 = y[7:0];
    av = 1; bv = (gap == 0);
    @(posedge clk); #1;
    av = 0; a = $urandom; a8 = $urandom;  // input changes after the valid must not matter
    if (gap > 0) begin
      repeat (gap - 1) @(posedge clk);
      #1 bv = 1;
      @(posedge clk); #1;
    end
    bv = 0; b = $urandom; b8 = $urandom;
    lat = 1;
    while (!rv && lat < 10) begin
      @(posedge clk); #1;
      lat++;
    end
    exp16 = model(o, longint'($signed(x)), longint'($signed(y)));
    exp8  = model(o, longint'($signed(x[7:0])), longint'($signed(y[7:0])));
    check($sformatf("op %s latency %0d", o.name(), lat), lat == 2);
    check($sformatf("op %s %h,%h -> %h exp %h", o.name(), x, y, r, exp16[15:0]), r == exp16[15:0]);
    check($sformatf("op %s 8-bit -> %h exp %h", o.name(), r8, exp8[15:0]), rv8 && r8 == exp8[15:0]);
    @(posedge clk); #1;
    check("valid lasts one cycle", !rv && !rv8);
    check("output buffer holds", r == exp16[15:0]);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pe_op_e ops [7] = '{OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_GRE, OP_EQU, OP_BUF};
    op = OP_NONE; a = 0; b = 0; av = 0; bv = 0; a8 = 0; b8 = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // directed corner cases
    run_one(OP_DIV, 16'd100, 16'd0, 0);
    run_one(OP_DIV, -16'sd7, 16'd2, 0);
    run_one(OP_EQU, 16'h1234, 16'h1234, 0);
    run_one(OP_GRE, -16'sd1, 16'd1, 0);
    run_one(OP_MUL, 16'h7fff, 16'h7fff, 3);
    // random operations and operand skews
    for (int n = 0; n < 300; n++) begin
      logic [15:0] x, y;
      x = $urandom; y = $urandom;
      if (n % 5 == 0) y = y >> ($urandom % 14);
      run_one(ops[$urandom % 7], x, y, (n % 3 == 0) ? int'($urandom % 4) : 0);
    end
    // NONE: operands go in, nothing comes out
    op = OP_NONE;
    av = 1; bv = 1; a = 5; b = 6;
    @(posedge clk); #1 av = 0; bv = 0;
    begin
      bit seen = 0;
      repeat (8) begin
        @(posedge clk); #1;
        if (rv || rv8) seen = 1;
      end
      check("NONE produces no valid", !seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
