// tb_int32_pe: checks the INT32 PE's hash operation (Morton code of the
// selected cube vertex, masked to T, plus level base) against a bit-level
// reference, the plain integer ops, and the one-cycle latency.
module tb_int32_pe;
  import inerf_pkg::*;
  import inerf_tb_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0;
  iop_e op;
  logic [2:0] vertex;
  logic [31:0] a, b, c, hreg_base, hreg_mask, y;
  logic y_valid;
  int checks = 0, failures = 0;

  int32_pe dut (.*);
  always #5 clk = ~clk;

  task automatic run(iop_e o, logic [2:0] v, logic [31:0] xa, xb, xc, hb, hm, exp_y);
    @(negedge clk);
    op = o; vertex = v; a = xa; b = xb; c = xc; hreg_base = hb; hreg_mask = hm; valid = 1;
    @(posedge clk); #1; valid = 0;
    checks++;
    if (!y_valid || y !== exp_y) begin
      failures++; $display("FAIL op=%0d v=%0d a=%0d b=%0d c=%0d got %h exp %h", o, v, xa, xb, xc, y, exp_y);
    end
  endtask

  initial begin
    logic [31:0] ra, rb, rc, hb, exp_h;
    logic [2:0]  v;
    op = IOP_MOV; vertex = 0; a = 0; b = 0; c = 0; hreg_base = 0; hreg_mask = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      ra = $urandom_range(0, 2046); rb = $urandom_range(0, 2046); rc = $urandom_range(0, 2046);
      v = 3'($urandom); hb = $urandom & 32'h01f8_0000;
      exp_h = 32'(morton_ref(int'(ra) + v[0], int'(rb) + v[1], int'(rc) + v[2], 11)) & 32'h7ffff;
      run(IOP_HASH, v, ra, rb, rc, hb, 32'h7ffff, exp_h + hb);
      ra = $urandom; rb = $urandom;
      run(IOP_ADD, 0, ra, rb, 0, 0, 0, ra + rb);
      run(IOP_SUB, 0, ra, rb, 0, 0, 0, ra - rb);
      run(IOP_MUL, 0, ra, rb, 0, 0, 0, ra * rb);
      run(IOP_AND, 0, ra, rb, 0, 0, 0, ra & rb);
      run(IOP_SHL, 0, ra, rb, 0, 0, 0, ra << rb[4:0]);
      run(IOP_SHR, 0, ra, rb, 0, 0, 0, ra >> rb[4:0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
