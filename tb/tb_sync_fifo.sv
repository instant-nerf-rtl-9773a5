// tb_sync_fifo: random push/pop traffic against a queue model, full/empty
// flags, count, and flush, at the instruction FIFO's default 128 x 64 size.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0;
  logic [63:0] din, dout;
  logic empty, full;
  logic [7:0] count;
  logic [63:0] q [$];
  int checks = 0, failures = 0;

  sync_fifo dut (.*);
  always #5 clk = ~clk;

  initial begin
    din = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == 128) || count !== 8'(q.size())) begin
        failures++; $display("FAIL flags at %0d size %0d", t, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL data"); end
      end
      flush = (t % 997 == 996);
      push = !flush && !full && ($urandom_range(0, 99) < ((t / 500) % 2 ? 70 : 30));
      pop  = !flush && !empty && ($urandom_range(0, 99) < 50);
      din  = {$urandom, $urandom};
      @(posedge clk);
      if (flush) q.delete();
      else begin
        if (pop)  void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
