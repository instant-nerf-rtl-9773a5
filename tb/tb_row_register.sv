// tb_row_register: r0 loads from DRAM and from the data MUX, priority
// between them, 128-bit beat writes (a full row in 64 beats) and word writes.
module tb_row_register;
  import inerf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ld_dram = 0, ld_mux = 0, beat_we = 0, word_we = 0;
  row_t dram_d, mux_d, q, exp_q;
  logic [5:0] beat_idx;
  logic [127:0] beat_d;
  logic [7:0] word_idx;
  word_t word_d;
  int checks = 0, failures = 0;

  row_register dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what);
    checks++;
    if (q !== exp_q) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic row_t rnd_row();
    row_t r;
    for (int i = 0; i < 256; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    dram_d = '0; mux_d = '0; beat_idx = 0; beat_d = 0; word_idx = 0; word_d = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    exp_q = '0; chk("reset");
    for (int t = 0; t < 5; t++) begin
      @(negedge clk); dram_d = rnd_row(); mux_d = rnd_row(); ld_dram = 1; ld_mux = 1;
      @(posedge clk); #1; ld_dram = 0; ld_mux = 0; exp_q = dram_d; chk("dram priority");
      @(negedge clk); ld_mux = 1; @(posedge clk); #1; ld_mux = 0; exp_q = mux_d; chk("mux");
      for (int k = 0; k < 64; k++) begin
        @(negedge clk); beat_we = 1; beat_idx = 6'(k); beat_d = {$urandom, $urandom, $urandom, $urandom};
        exp_q[k*128 +: 128] = beat_d;
        @(posedge clk); #1; beat_we = 0;
      end
      chk("beats");
      @(negedge clk); word_we = 1; word_idx = 8'($urandom); word_d = $urandom; exp_q[word_idx*32 +: 32] = word_d;
      @(posedge clk); #1; word_we = 0; chk("word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
