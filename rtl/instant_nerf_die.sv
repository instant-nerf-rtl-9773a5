// instant_nerf_die: one LPDDR4 DRAM die with a near-memory microarchitecture
// (nmp_bank) beside each of its N_BANKS banks, plus the inter-bank link.
//
// All banks receive the same start pulse and program row; each knows its
// index (bank_id), so one broadcast program can be run with heterogeneous
// inter-bank parallelism: hash-table steps (HT and its backward pass) under
// parameter parallelism, where each bank runs only the levels it owns
// (lvl_gate instructions, owner from level_bank_map), and MLP steps under
// data parallelism, where every bank runs the same small MLP on its own
// share of the points. Rows move between banks only through the link.
//
// The DRAM cell arrays, row buffers and I/O are not part of this RTL: each
// bank's command/address outputs and its read/write data rows are ports of
// the die, to be connected to the memory array (a behavioural model in the
// testbench). 'busy' is the OR of all banks' busy flags. Per-bank statistics
// counters are brought out for observation. The organisation (16 banks,
// 1 KB rows, 128-bit internal paths) is the paper's; the port list is this
// design's.
module instant_nerf_die
  import inerf_pkg::*;
#(
  parameter int unsigned N_BANKS     = 16,
  parameter int unsigned N_SUBARRAYS = 8,
  parameter int unsigned N_INT       = 256,
  parameter int unsigned N_FP        = 256,
  parameter int unsigned SA_W        = $clog2(N_SUBARRAYS),
  parameter int unsigned SA_ROW_W    = ROWG_W - SA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [ROWG_W-1:0]   start_row,
  output logic                busy,
  // per-bank DRAM array interface
  output dram_cmd_e           dram_cmd   [N_BANKS],
  output logic [SA_W-1:0]     dram_sa    [N_BANKS],
  output logic [SA_ROW_W-1:0] dram_row   [N_BANKS],
  output row_t                dram_wdata [N_BANKS],
  input  row_t                dram_rdata [N_BANKS],
  // statistics
  output logic [31:0]         n_instr    [N_BANKS],
  output logic [31:0]         n_hit      [N_BANKS],
  output logic [31:0]         n_miss     [N_BANKS],
  output logic [31:0]         n_skip     [N_BANKS],
  output logic [31:0]         n_act      [N_BANKS],
  output logic [31:0]         n_conflict [N_BANKS],
  output logic [31:0]         n_link_rows,
  output logic [31:0]         n_link_beats
);
  localparam int unsigned BW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;
  localparam int unsigned KW = $clog2(ROW_BITS / LINK_BITS);

  logic [N_BANKS-1:0]   busy_b, tx_req, tx_done, rx_ready, rx_beat_we, rx_done;
  logic [N_BANKS-1:0]   tx_mask [N_BANKS];
  logic [BW-1:0]        rx_src  [N_BANKS];
  logic [N_BANKS-1:0]   rx_any;
  row_t                 tx_row  [N_BANKS];
  logic [KW-1:0]        rx_beat_idx;
  logic [LINK_BITS-1:0] rx_beat;

  for (genvar g = 0; g < N_BANKS; g++) begin : g_bank
    nmp_bank #(.N_BANKS(N_BANKS), .N_SUBARRAYS(N_SUBARRAYS), .N_INT(N_INT), .N_FP(N_FP)) u_bank (
      .clk, .rst_n, .start, .start_row, .bank_id(BW'(g)), .busy(busy_b[g]),
      .dram_cmd(dram_cmd[g]), .dram_sa(dram_sa[g]), .dram_row(dram_row[g]),
      .dram_wdata(dram_wdata[g]), .dram_rdata(dram_rdata[g]),
      .tx_req(tx_req[g]), .tx_mask(tx_mask[g]), .tx_row(tx_row[g]), .tx_done(tx_done[g]),
      .rx_ready(rx_ready[g]), .rx_src(rx_src[g]), .rx_any(rx_any[g]), .rx_beat_we(rx_beat_we[g]), .rx_beat_idx, .rx_beat,
      .rx_done(rx_done[g]),
      .n_instr(n_instr[g]), .n_hit(n_hit[g]), .n_miss(n_miss[g]), .n_skip(n_skip[g]),
      .n_act(n_act[g]), .n_conflict(n_conflict[g])
    );
  end

  interbank_link #(.N_BANKS(N_BANKS)) u_link (
    .clk, .rst_n, .tx_req, .tx_mask, .tx_row, .tx_done, .rx_ready, .rx_src, .rx_any,
    .rx_beat_we, .rx_beat_idx, .rx_beat, .rx_done,
    .n_rows(n_link_rows), .n_beats(n_link_beats)
  );

  assign busy = |busy_b;
endmodule
