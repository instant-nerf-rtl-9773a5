// data_mux: the data transfer MUX of one bank. It moves data between r0
// (the row-buffer sized register), the scratchpad, the controller (program
// rows into the instruction FIFO, address rows into the address buffer) and
// the hash registers.
//
// One transfer per cycle, chosen by 'sel' (dm_sel_e):
//   DM_R0_TO_SPM    r0 row          -> scratchpad line 'line'
//   DM_SPM_TO_R0    scratchpad line -> r0
//   DM_SPM_TO_CTRL  scratchpad line -> controller (address buffer)
//   DM_R0_TO_CTRL   r0 row          -> controller (instruction FIFO)
//   DM_SPM_TO_HREG  scratchpad line -> hash registers
//   DM_R0_WORD      r0 word 'col'   -> scratchpad word {line, idx}  (gather)
//   DM_SPM_WORD     scratchpad word {line, idx} -> r0 word 'col'    (scatter)
// Combinational: the strobes it raises are captured by the destination at
// the next clock edge. The set of endpoints follows the paper's block
// diagram; the word-level transfers and the encoding are this design's.
module data_mux
  import inerf_pkg::*;
(
  input  dm_sel_e            sel,
  input  logic               line,
  input  logic [COL_W-1:0]   col,
  input  logic [COL_W-1:0]   idx,
  input  row_t               r0_q,
  input  row_t               spm_line_q,     // scratchpad line 'line' (read)
  input  word_t              spm_words [SPM_WORDS],
  // to scratchpad
  output logic               spm_line_we,
  output row_t               spm_line_wdata,
  output logic               spm_word_we,
  output logic [SPM_AW-1:0]  spm_word_addr,
  output word_t              spm_word_wdata,
  // to r0
  output logic               r0_ld,
  output row_t               r0_d,
  output logic               r0_word_we,
  output word_t              r0_word_d,
  // to controller / hash registers
  output logic               ctrl_ld,
  output logic               ctrl_is_instr,
  output row_t               ctrl_row,
  output logic               hreg_ld
);
  assign spm_line_wdata = r0_q;
  assign spm_word_addr  = {line, idx};
  assign spm_word_wdata = r0_q[col*WORD_BITS +: WORD_BITS];
  assign r0_d           = spm_line_q;
  assign r0_word_d      = spm_words[{line, idx}];
  assign ctrl_row       = (sel == DM_R0_TO_CTRL) ? r0_q : spm_line_q;

  always_comb begin
    spm_line_we   = 1'b0;
    spm_word_we   = 1'b0;
    r0_ld         = 1'b0;
    r0_word_we    = 1'b0;
    ctrl_ld       = 1'b0;
    ctrl_is_instr = 1'b0;
    hreg_ld       = 1'b0;
    unique case (sel)
      DM_R0_TO_SPM:   spm_line_we = 1'b1;
      DM_SPM_TO_R0:   r0_ld       = 1'b1;
      DM_SPM_TO_CTRL: ctrl_ld     = 1'b1;
      DM_R0_TO_CTRL:  begin ctrl_ld = 1'b1; ctrl_is_instr = 1'b1; end
      DM_SPM_TO_HREG: hreg_ld     = 1'b1;
      DM_R0_WORD:     spm_word_we = 1'b1;
      DM_SPM_WORD:    r0_word_we  = 1'b1;
      default: ;
    endcase
  end
endmodule
