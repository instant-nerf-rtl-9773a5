// tb_interbank_link: 4-bank link. A broadcast from bank 0 to banks 1 and 2
// that waits for both receivers, the 64-beat transfer time, the rebuilt rows
// at the receivers (64 beats + 1 cycle once the last receiver is ready),
// and round-robin order between two simultaneous senders.
module tb_interbank_link;
  import inerf_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] tx_req, tx_done, rx_ready, rx_beat_we, rx_done;
  logic [NB-1:0] tx_mask [NB];
  logic [1:0] rx_src [NB];
  logic [NB-1:0] rx_any;
  row_t tx_row [NB];
  row_t rx_row [NB];
  logic [5:0] rx_beat_idx;
  logic [127:0] rx_beat;
  logic [31:0] n_rows, n_beats;
  int checks = 0, failures = 0;

  interbank_link #(.N_BANKS(NB)) dut (.*);
  always #5 clk = ~clk;

  // receivers rebuild rows from beats
  always @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (rx_beat_we[b]) rx_row[b][rx_beat_idx*128 +: 128] <= rx_beat;

  function automatic row_t rnd_row();
    row_t r;
    for (int i = 0; i < 256; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    int t0, cyc;
    int order [$];
    tx_req = 0; rx_ready = 0; rx_any = 0;
    for (int b = 0; b < NB; b++) rx_src[b] = 0;
    for (int b = 0; b < NB; b++) begin tx_mask[b] = 0; tx_row[b] = rnd_row(); rx_row[b] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // broadcast 0 -> {1,2}; receiver 2 is late
    @(negedge clk); tx_req[0] = 1; tx_mask[0] = 4'b0110; rx_ready[1] = 1;
    repeat (10) @(posedge clk);
    checks++; if (n_beats != 0) begin failures++; $display("FAIL started before all receivers ready"); end
    @(negedge clk); rx_ready[2] = 1; t0 = 0;
    cyc = 0;
    while (!tx_done[0]) begin @(posedge clk); #1; cyc++; end
    checks++; if (cyc != 64 + 1) begin failures++; $display("FAIL transfer time %0d", cyc); end
    checks++; if (rx_done !== 4'b0110) begin failures++; $display("FAIL rx_done"); end
    @(negedge clk); tx_req[0] = 0; rx_ready = 0;
    checks++; if (rx_row[1] !== tx_row[0] || rx_row[2] !== tx_row[0] || rx_row[3] !== '0) begin failures++; $display("FAIL rows"); end
    // two senders at once, 1 -> 3 and 2 -> 3; bank 3 first expects bank 2
    // (so bank 1 must wait although round robin would favour it), then any
    @(negedge clk); tx_req = 4'b0110; tx_mask[1] = 4'b1000; tx_mask[2] = 4'b1000; rx_ready[3] = 1;
    rx_src[3] = 2'd2;
    while (order.size() < 2) begin
      @(posedge clk); #1;
      if (order.size() == 1) rx_any[3] = 1;
      if (tx_done[1]) begin order.push_back(1); checks++; if (rx_row[3] !== tx_row[1]) failures++; @(negedge clk); tx_req[1] = 0; end
      if (tx_done[2]) begin order.push_back(2); checks++; if (rx_row[3] !== tx_row[2]) failures++; @(negedge clk); tx_req[2] = 0; end
    end
    checks++; if (order[0] != 2 || order[1] != 1) begin failures++; $display("FAIL source selection"); end
    @(posedge clk); #1;
    checks++; if (n_rows != 3 || n_beats != 192) begin failures++; $display("FAIL counters %0d %0d", n_rows, n_beats); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
