// tb_data_mux: for each transfer select, checks which strobes rise and that
// the routed rows and words are the right ones.
module tb_data_mux;
  import inerf_pkg::*;
  dm_sel_e sel;
  logic line;
  logic [7:0] col, idx;
  row_t r0_q, spm_line_q, spm_line_wdata, r0_d, ctrl_row;
  word_t spm_words [SPM_WORDS];
  logic spm_line_we, spm_word_we, r0_ld, r0_word_we, ctrl_ld, ctrl_is_instr, hreg_ld;
  logic [8:0] spm_word_addr;
  word_t spm_word_wdata, r0_word_d;
  int checks = 0, failures = 0;

  data_mux dut (.*);

  task automatic expect_strobes(logic [6:0] e, string what);
    checks++;
    if ({spm_line_we, spm_word_we, r0_ld, r0_word_we, ctrl_ld, ctrl_is_instr, hreg_ld} !== e) begin
      failures++; $display("FAIL strobes %s", what);
    end
  endtask

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < 256; i++) begin r0_q[i*32 +: 32] = $urandom; spm_line_q[i*32 +: 32] = $urandom; end
      for (int w = 0; w < SPM_WORDS; w++) spm_words[w] = $urandom;
      line = 1'($urandom); col = 8'($urandom); idx = 8'($urandom);
      sel = DM_NONE;        #1; expect_strobes(7'b0000000, "none");
      sel = DM_R0_TO_SPM;   #1; expect_strobes(7'b1000000, "r0->spm");
      checks++; if (spm_line_wdata !== r0_q) failures++;
      sel = DM_SPM_TO_R0;   #1; expect_strobes(7'b0010000, "spm->r0");
      checks++; if (r0_d !== spm_line_q) failures++;
      sel = DM_SPM_TO_CTRL; #1; expect_strobes(7'b0000100, "spm->ctrl");
      checks++; if (ctrl_row !== spm_line_q) failures++;
      sel = DM_R0_TO_CTRL;  #1; expect_strobes(7'b0000110, "r0->ctrl");
      checks++; if (ctrl_row !== r0_q) failures++;
      sel = DM_SPM_TO_HREG; #1; expect_strobes(7'b0000001, "hreg");
      sel = DM_R0_WORD;     #1; expect_strobes(7'b0100000, "gather word");
      checks++; if (spm_word_addr !== {line, idx} || spm_word_wdata !== r0_q[col*32 +: 32]) failures++;
      sel = DM_SPM_WORD;    #1; expect_strobes(7'b0001000, "scatter word");
      checks++; if (r0_word_d !== spm_words[{line, idx}]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
