// tb_scratchpad: line writes and reads, PE write-back of a line, single
// word writes, and the all-words crossbar view, against a reference array.
module tb_scratchpad;
  import inerf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic line_we = 0, line_wsel = 0, line_rsel = 0, pe_we = 0, pe_line = 0, word_we = 0;
  row_t line_wdata, line_rdata;
  word_t pe_wdata [ROW_WORDS];
  logic [SPM_AW-1:0] word_addr;
  word_t word_wdata;
  word_t words [SPM_WORDS];
  word_t ref_m [SPM_WORDS];
  int checks = 0, failures = 0;

  scratchpad dut (.*);
  always #5 clk = ~clk;

  task automatic compare();
    for (int w = 0; w < SPM_WORDS; w++) begin
      checks++;
      if (words[w] !== ref_m[w]) begin failures++; if (failures < 10) $display("FAIL word %0d", w); end
    end
    for (int l = 0; l < 2; l++) begin
      line_rsel = 1'(l); #1;
      for (int i = 0; i < ROW_WORDS; i++) begin
        checks++;
        if (line_rdata[i*32 +: 32] !== ref_m[l*256 + i]) failures++;
      end
    end
  endtask

  initial begin
    word_addr = 0; word_wdata = 0; line_wdata = '0;
    for (int i = 0; i < ROW_WORDS; i++) pe_wdata[i] = 0;
    for (int w = 0; w < SPM_WORDS; w++) ref_m[w] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      unique case (t % 3)
        0: begin
          line_we = 1; line_wsel = 1'($urandom);
          for (int i = 0; i < ROW_WORDS; i++) begin
            line_wdata[i*32 +: 32] = $urandom; ref_m[line_wsel*256 + i] = line_wdata[i*32 +: 32];
          end
        end
        1: begin
          pe_we = 1; pe_line = 1'($urandom);
          for (int i = 0; i < ROW_WORDS; i++) begin pe_wdata[i] = $urandom; ref_m[pe_line*256 + i] = pe_wdata[i]; end
        end
        default: begin
          word_we = 1; word_addr = 9'($urandom); word_wdata = $urandom; ref_m[word_addr] = word_wdata;
        end
      endcase
      @(posedge clk); #1;
      line_we = 0; pe_we = 0; word_we = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
