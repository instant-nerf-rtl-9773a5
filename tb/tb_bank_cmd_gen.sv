// tb_bank_cmd_gen: drives row reads and writes through the command
// generator into the behavioural DRAM bank, which checks the command
// protocol and the tRCD/tRP/tRAS spacing. Checks read data, the number of
// activations and conflicts, that two open subarrays serve alternating
// requests without new activations (subarray parallelism), and the
// latencies: 2 + tRCD + tRA cycles for a closed subarray and 2 + tRA for an
// open-row hit after idle time.
module tb_bank_cmd_gen;
  import inerf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, req_we = 0, done;
  logic [2:0] req_sa;
  logic [13:0] req_row;
  dram_cmd_e cmd;
  logic [2:0] cmd_sa;
  logic [13:0] cmd_row;
  logic [31:0] n_act, n_conflict;
  row_t wdata, rdata;
  int checks = 0, failures = 0;

  bank_cmd_gen dut (.*);
  dram_bank_model mem (.clk, .rst_n, .cmd, .sa(cmd_sa), .row(cmd_row), .wdata, .rdata);
  always #5 clk = ~clk;

  function automatic row_t pat(int r);
    row_t x;
    for (int i = 0; i < 256; i++) x[i*32 +: 32] = 32'(r * 1000 + i);
    return x;
  endfunction

  // Issue one request, return its latency from acceptance to 'done'.
  task automatic access(logic we, int sa, int row, output int lat);
    @(negedge clk);
    req_valid = 1; req_we = we; req_sa = 3'(sa); req_row = 14'(row);
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1; req_valid = 0;
    lat = 0;
    while (!done) begin @(posedge clk); #1; lat++; end
  endtask

  initial begin
    int lat, a0, c0;
    wdata = '0;
    for (int r = 0; r < 64; r++) mem.poke(r, pat(r));
    repeat (3) @(posedge clk); rst_n = 1;
    // closed subarray: ACT, then RD after tRCD, data after tRA
    access(0, 1, 2, lat);                      // rowg = 2*8+1 = 17
    checks++; if (lat != 2 + 4 + 2) begin failures++; $display("FAIL closed latency %0d", lat); end
    @(posedge clk); #1;
    checks++; if (rdata !== pat(17)) begin failures++; $display("FAIL data 17"); end
    repeat (20) @(posedge clk);
    access(0, 1, 2, lat);                      // open-row hit
    checks++; if (lat != 2 + 2) begin failures++; $display("FAIL hit latency %0d", lat); end
    checks++; if (n_act != 1 || n_conflict != 0) begin failures++; $display("FAIL act count"); end
    // open another subarray, then alternate: no new ACTs
    access(0, 2, 5, lat);
    a0 = int'(n_act);
    for (int k = 0; k < 6; k++) begin
      access(0, (k % 2) ? 1 : 2, (k % 2) ? 2 : 5, lat);
      @(posedge clk); #1;
      checks++; if (rdata !== pat((k % 2) ? 17 : 42)) begin failures++; $display("FAIL alt data"); end
    end
    checks++; if (int'(n_act) != a0) begin failures++; $display("FAIL subarray parallelism: new ACTs"); end
    // conflict in subarray 1: PRE + ACT
    c0 = int'(n_conflict);
    access(0, 1, 3, lat);
    @(posedge clk); #1;
    checks++; if (int'(n_conflict) != c0 + 1 || rdata !== pat(25)) begin failures++; $display("FAIL conflict"); end
    // write then read back through another row
    wdata = pat(999);
    access(1, 4, 7, lat);
    wdata = '0;
    access(0, 4, 1, lat);                      // conflict, closes row 7
    access(0, 4, 7, lat);
    @(posedge clk); #1;
    checks++; if (rdata !== pat(999)) begin failures++; $display("FAIL write readback"); end
    checks++; if (mem.peek(7 * 8 + 4) !== pat(999)) begin failures++; $display("FAIL array content"); end
    // a burst of random traffic; the model checks the timing rules
    for (int k = 0; k < 200; k++) access(1'($urandom_range(0, 3) == 0), $urandom_range(0, 7), $urandom_range(0, 3), lat);
    checks++; if (mem.errors != 0) begin failures++; $display("FAIL dram protocol errors %0d", mem.errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
