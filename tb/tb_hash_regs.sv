// tb_hash_regs: reset values (bases 0, mask 2^19-1), then loads of random
// parameter rows and a read of every level's base and the mask.
module tb_hash_regs;
  import inerf_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  row_t ldata;
  logic [3:0] level;
  word_t base, mask;
  int checks = 0, failures = 0;

  hash_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    ldata = '0; level = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    checks++; if (mask !== 32'h7ffff || base !== 0) failures++;
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      for (int i = 0; i < 17; i++) ldata[i*32 +: 32] = $urandom;
      load = 1; @(posedge clk); #1; load = 0;
      for (int l = 0; l < 16; l++) begin
        level = 4'(l); #1;
        checks++;
        if (base !== ldata[l*32 +: 32] || mask !== ldata[16*32 +: 32]) begin failures++; $display("FAIL level %0d", l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
