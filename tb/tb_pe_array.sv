// tb_pe_array: the full 256 + 256 PE array. An INT32 hash step with grp8
// (lane i hashes vertex i mod 8 of point i/8, with the level base and mask
// delivered through the hash-register MUX), a plain INT add (hash parameters
// must not leak in), and FP32 multiply and multiply-accumulate on all lanes.
module tb_pe_array;
  import inerf_pkg::*;
  import inerf_tb_pkg::*;
  logic clk = 0, rst_n = 0, int_valid = 0, fp_valid = 0, grp8 = 0, y_valid;
  iop_e iop; fop_e fop;
  logic [2:0] vertex;
  word_t hreg_base, hreg_mask;
  word_t a [256], b [256], c [256], y [256];
  word_t acc [256];
  int checks = 0, failures = 0;

  pe_array dut (.*);
  always #5 clk = ~clk;

  task automatic step(logic iv, logic fv);
    @(negedge clk); int_valid = iv; fp_valid = fv;
    @(posedge clk); #1; int_valid = 0; fp_valid = 0;
    checks++; if (!y_valid) begin failures++; $display("FAIL y_valid"); end
  endtask

  initial begin
    iop = IOP_HASH; fop = FOP_MUL; vertex = 0; hreg_base = 32'h0010_0000; hreg_mask = 32'h7ffff;
    for (int i = 0; i < 256; i++) begin a[i] = 0; b[i] = 0; c[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // hash: 32 points, 8 lanes each
    for (int p = 0; p < 32; p++)
      for (int v = 0; v < 8; v++) begin
        a[8*p+v] = 32'(100 + p); b[8*p+v] = 32'(200 + 2*p); c[8*p+v] = 32'(300 + 3*p);
      end
    grp8 = 1; vertex = 0;
    step(1, 0);
    for (int i = 0; i < 256; i++) begin
      int p, v;
      p = i / 8; v = i % 8;
      checks++;
      if (y[i] !== (32'(morton_ref(100 + p + (v & 1), 200 + 2*p + ((v >> 1) & 1), 300 + 3*p + (v >> 2), 11)) & 32'h7ffff) + 32'h0010_0000) begin
        failures++; if (failures < 5) $display("FAIL hash lane %0d", i);
      end
    end
    grp8 = 0; iop = IOP_ADD;
    for (int i = 0; i < 256; i++) begin a[i] = $urandom; b[i] = $urandom; end
    step(1, 0);
    for (int i = 0; i < 256; i++) begin checks++; if (y[i] !== a[i] + b[i]) failures++; end
    // FP multiply on all lanes
    for (int i = 0; i < 256; i++) begin
      a[i] = {1'($urandom), 8'($urandom_range(120, 134)), 23'($urandom)};
      b[i] = {1'($urandom), 8'($urandom_range(120, 134)), 23'($urandom)};
    end
    fop = FOP_MUL; step(0, 1);
    for (int i = 0; i < 256; i++) begin checks++; if (y[i] !== fmul(a[i], b[i])) failures++; end
    // clear then accumulate three products
    fop = FOP_CLR; step(0, 1);
    for (int i = 0; i < 256; i++) acc[i] = 0;
    for (int k = 0; k < 3; k++) begin
      for (int i = 0; i < 256; i++) begin
        a[i] = {1'($urandom), 8'($urandom_range(124, 130)), 23'($urandom)};
        b[i] = {1'($urandom), 8'($urandom_range(124, 130)), 23'($urandom)};
        acc[i] = fadd(acc[i], fmul(a[i], b[i]));
      end
      fop = FOP_MAC; step(0, 1);
    end
    for (int i = 0; i < 256; i++) begin checks++; if (y[i] !== acc[i]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
