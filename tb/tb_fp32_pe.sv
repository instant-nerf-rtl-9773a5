// tb_fp32_pe: checks every FP32 PE operation against a reference built on
// double-precision reals, rounded to binary32 (nearest, ties to even) by a
// separate bit-level routine. Operand exponents are kept close together so
// the double result is exact before that single rounding. Also checks the
// one-cycle result latency.
module tb_fp32_pe;
  import inerf_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0;
  fop_e op;
  logic [31:0] a, b, c, y;
  logic y_valid;
  int checks = 0, failures = 0;

  fp32_pe dut (.*);
  always #5 clk = ~clk;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) + 896), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        s, g, st, lsb;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    s = d[63];
    if (d[62:0] == 0) return {s, 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28]; st = |d[27:0]; lsb = d[29];
    if (g && (st || lsb)) m = m + 1;
    if (m[23]) e = e + 1;
    if (e <= 0) return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] rnd_f(int emin, int emax);
    return {1'($urandom), 8'($urandom_range(emin, emax)), 23'($urandom)};
  endfunction

  task automatic run(fop_e o, logic [31:0] xa, xb, xc, logic [31:0] exp_y, string what);
    @(negedge clk);
    op = o; a = xa; b = xb; c = xc; valid = 1;
    @(posedge clk); #1;
    valid = 0;
    checks++;
    if (!y_valid || y !== exp_y) begin
      failures++;
      $display("FAIL %s op=%0d a=%h b=%h c=%h got %h exp %h v=%b", what, o, xa, xb, xc, y, exp_y, y_valid);
    end
  endtask

  logic [31:0] acc_ref;
  logic [31:0] ta, tb_, tc;
  int          ti;

  initial begin
    op = FOP_MOV; a = 0; b = 0; c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // A few exact cases.
    run(FOP_MUL, 32'h3fc00000, 32'h40000000, 0, 32'h40400000, "1.5*2");
    run(FOP_ADD, 32'h3f800000, 32'hbf800000, 0, 32'h00000000, "1-1");
    run(FOP_ADD, 32'h3f800000, 32'h00000000, 0, 32'h3f800000, "1+0");
    run(FOP_SUB, 32'h40400000, 32'h3f800000, 0, 32'h40000000, "3-1");
    run(FOP_FLOOR, 32'hbfc00000, 0, 0, 32'hfffffffe, "floor -1.5");
    run(FOP_FLOOR, 32'h41200000, 0, 0, 32'd10, "floor 10");
    run(FOP_I2F, 32'd7, 0, 0, 32'h40e00000, "i2f 7");
    run(FOP_RELU, 32'hc0000000, 0, 0, 32'd0, "relu -2");
    for (int n = 0; n < 400; n++) begin
      ta = rnd_f(110, 140); tb_ = rnd_f(110, 140); tc = rnd_f(120, 130);
      run(FOP_MUL, ta, tb_, 0, r2f(f2r(ta) * f2r(tb_)), "mul");
      tb_ = rnd_f(118, 128); ta = rnd_f(118, 128);
      run(FOP_ADD, ta, tb_, 0, r2f(f2r(ta) + f2r(tb_)), "add");
      run(FOP_SUB, ta, tb_, 0, r2f(f2r(ta) - f2r(tb_)), "sub");
      run(FOP_MADD, ta, tb_, tc, r2f(f2r(r2f(f2r(ta) * f2r(tb_))) + f2r(tc)), "madd");
      ta = rnd_f(100, 150);
      run(FOP_FLOOR, ta, 0, 0, 32'($floor(f2r(ta))), "floor");
      ti = int'($urandom) >>> $urandom_range(0, 30);
      run(FOP_I2F, 32'(ti), 0, 0, r2f(real'(ti)), "i2f");
      run(FOP_RELU, ta, 0, 0, ta[31] ? 32'd0 : ta, "relu");
      run(FOP_DRELU, ta, tb_, 0, ta[31] ? 32'd0 : tb_, "drelu");
    end
    // Accumulation: CLR then a chain of MACs.
    run(FOP_CLR, 0, 0, 0, 32'd0, "clr");
    acc_ref = 0;
    for (int n = 0; n < 64; n++) begin
      ta = rnd_f(124, 128); tb_ = rnd_f(124, 128);
      acc_ref = r2f(f2r(acc_ref) + f2r(r2f(f2r(ta) * f2r(tb_))));
      run(FOP_MAC, ta, tb_, 0, acc_ref, "mac");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
