// nmp_bank: the near-memory microarchitecture attached to one DRAM bank.
//
// A compute engine (2 KB scratchpad, three crossbar operand ports, a PE
// array of 256 INT32 + 256 FP32 PEs, hash registers) and a controller,
// joined to the bank's global row buffer through r0, a 1 KB register, and the
// data transfer MUX. Everything the engine computes on enters and leaves as
// whole rows through r0: program rows (into the instruction FIFO), hash
// table rows (gathered word by word into the scratchpad), MLP weights and
// activations, and rows exchanged with other banks over the inter-bank link.
//
// DRAM side: dram_cmd/dram_sa/dram_row carry one command per cycle to the
// bank; dram_wdata (= r0) is the row written by CMD_WR; dram_rdata is the
// global row buffer content, captured into r0 when the controller's read
// completes. Link side: tx_req/tx_mask ask for r0 to be sent, tx_row is r0;
// received beats are written into r0 while rx_ready is high, rx_src/rx_any
// say which sender the pending RECV expects. The block
// structure follows the paper's per-bank microarchitecture; interface
// signals and timing are this design's.
module nmp_bank
  import inerf_pkg::*;
#(
  parameter int unsigned N_BANKS     = 16,
  parameter int unsigned N_SUBARRAYS = 8,
  parameter int unsigned N_INT       = 256,
  parameter int unsigned N_FP        = 256,
  parameter int unsigned BW          = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  parameter int unsigned SA_W        = $clog2(N_SUBARRAYS),
  parameter int unsigned SA_ROW_W    = ROWG_W - SA_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [ROWG_W-1:0]    start_row,
  input  logic [BW-1:0]        bank_id,
  output logic                 busy,
  // DRAM bank
  output dram_cmd_e            dram_cmd,
  output logic [SA_W-1:0]      dram_sa,
  output logic [SA_ROW_W-1:0]  dram_row,
  output row_t                 dram_wdata,
  input  row_t                 dram_rdata,
  // inter-bank link
  output logic                 tx_req,
  output logic [N_BANKS-1:0]   tx_mask,
  output row_t                 tx_row,
  input  logic                 tx_done,
  output logic                 rx_ready,
  output logic [BW-1:0]        rx_src,
  output logic                 rx_any,
  input  logic                 rx_beat_we,
  input  logic [$clog2(ROW_BITS/LINK_BITS)-1:0] rx_beat_idx,
  input  logic [LINK_BITS-1:0] rx_beat,
  input  logic                 rx_done,
  // statistics
  output logic [31:0]          n_instr,
  output logic [31:0]          n_hit,
  output logic [31:0]          n_miss,
  output logic [31:0]          n_skip,
  output logic [31:0]          n_act,
  output logic [31:0]          n_conflict
);
  localparam int unsigned N = (N_INT > N_FP) ? N_INT : N_FP;

  // controller <-> datapath
  dm_sel_e             dm_sel;
  logic                dm_line;
  logic [COL_W-1:0]    dm_col, dm_idx;
  logic                ctrl_ld, ctrl_is_instr;
  row_t                ctrl_row;
  logic [SPM_AW-1:0]   xa_base, xa_stride, xb_base, xb_stride, xc_base;
  logic                x_grp8, int_valid, fp_valid, pe_y_valid, pe_wb, pe_wb_line;
  iop_e                iop;
  fop_e                fop;
  logic [2:0]          vertex;
  logic [3:0]          level;
  logic                r0_ld_dram;

  controller #(.N_BANKS(N_BANKS), .N_SUBARRAYS(N_SUBARRAYS)) u_ctrl (
    .clk, .rst_n, .start, .start_row, .bank_id, .busy,
    .dm_sel, .dm_line, .dm_col, .dm_idx, .ctrl_ld, .ctrl_is_instr, .ctrl_row,
    .xa_base, .xa_stride, .xb_base, .xb_stride, .xc_base, .x_grp8,
    .int_valid, .fp_valid, .iop, .fop, .vertex, .level,
    .pe_y_valid, .pe_wb, .pe_wb_line,
    .r0_ld_dram, .rx_ready, .rx_src, .rx_any, .rx_done,
    .dram_cmd, .dram_sa, .dram_row,
    .tx_req, .tx_mask, .tx_done,
    .n_instr, .n_hit, .n_miss, .n_skip, .n_act, .n_conflict
  );

  // r0
  row_t  r0_q, r0_d;
  logic  r0_ld_mux, r0_word_we;
  word_t r0_word_d;

  row_register u_r0 (
    .clk, .rst_n,
    .ld_dram(r0_ld_dram), .dram_d(dram_rdata),
    .ld_mux(r0_ld_mux), .mux_d(r0_d),
    .beat_we(rx_beat_we), .beat_idx(rx_beat_idx), .beat_d(rx_beat),
    .word_we(r0_word_we), .word_idx(dm_col), .word_d(r0_word_d),
    .q(r0_q)
  );
  assign dram_wdata = r0_q;
  assign tx_row     = r0_q;

  // scratchpad
  word_t spm_words [SPM_WORDS];
  row_t  spm_line_q, spm_line_wdata;
  logic  spm_line_we, spm_word_we;
  logic [SPM_AW-1:0] spm_word_addr;
  word_t spm_word_wdata;
  word_t pe_y [N];
  word_t pe_wdata [ROW_WORDS];
  logic  hreg_ld;

  for (genvar i = 0; i < ROW_WORDS; i++) begin : g_wb
    if (i < N) begin : g_pe
      assign pe_wdata[i] = pe_y[i];
    end else begin : g_zero
      assign pe_wdata[i] = '0;
    end
  end

  scratchpad u_spm (
    .clk, .rst_n,
    .line_we(spm_line_we), .line_wsel(dm_line), .line_wdata(spm_line_wdata),
    .line_rsel(dm_line), .line_rdata(spm_line_q),
    .pe_we(pe_wb), .pe_line(pe_wb_line), .pe_wdata(pe_wdata),
    .word_we(spm_word_we), .word_addr(spm_word_addr), .word_wdata(spm_word_wdata),
    .words(spm_words)
  );

  data_mux u_dmux (
    .sel(dm_sel), .line(dm_line), .col(dm_col), .idx(dm_idx),
    .r0_q, .spm_line_q, .spm_words,
    .spm_line_we, .spm_line_wdata, .spm_word_we, .spm_word_addr, .spm_word_wdata,
    .r0_ld(r0_ld_mux), .r0_d, .r0_word_we, .r0_word_d,
    .ctrl_ld, .ctrl_is_instr, .ctrl_row, .hreg_ld
  );

  // hash registers
  word_t hreg_base, hreg_mask;
  hash_regs u_hregs (
    .clk, .rst_n, .load(hreg_ld), .ldata(spm_line_q), .level,
    .base(hreg_base), .mask(hreg_mask)
  );

  // crossbar: three operand ports
  word_t opa [N], opb [N], opc [N];
  crossbar #(.N_IN(SPM_WORDS), .N_OUT(N)) u_xa (
    .din(spm_words), .base(xa_base), .stride(xa_stride), .grp8(x_grp8), .dout(opa));
  crossbar #(.N_IN(SPM_WORDS), .N_OUT(N)) u_xb (
    .din(spm_words), .base(xb_base), .stride(xb_stride), .grp8(x_grp8), .dout(opb));
  crossbar #(.N_IN(SPM_WORDS), .N_OUT(N)) u_xc (
    .din(spm_words), .base(xc_base), .stride(SPM_AW'(1)), .grp8(x_grp8), .dout(opc));

  pe_array #(.N_INT(N_INT), .N_FP(N_FP)) u_pes (
    .clk, .rst_n, .int_valid, .fp_valid, .iop, .fop, .vertex, .grp8(x_grp8),
    .hreg_base, .hreg_mask, .a(opa), .b(opb), .c(opc),
    .y(pe_y), .y_valid(pe_y_valid)
  );
endmodule
