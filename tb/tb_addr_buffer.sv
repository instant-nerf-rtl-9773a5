// tb_addr_buffer: parallel load of 256 addresses, indexed reads, and that
// the contents hold until the next load.
module tb_addr_buffer;
  logic clk = 0, rst_n = 0, load = 0;
  logic [8191:0] ldata, last;
  logic [7:0] rd_idx;
  logic [31:0] addr;
  int checks = 0, failures = 0;

  addr_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    ldata = '0; rd_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      @(negedge clk);
      for (int i = 0; i < 256; i++) ldata[i*32 +: 32] = $urandom;
      last = ldata; load = 1; @(posedge clk); #1; load = 0;
      ldata = '1;   // must not be captured without load
      @(posedge clk);
      for (int i = 0; i < 256; i++) begin
        rd_idx = 8'(i); #1; checks++;
        if (addr !== last[i*32 +: 32]) begin failures++; $display("FAIL idx %0d", i); end
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
