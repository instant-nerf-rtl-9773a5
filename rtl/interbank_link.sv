// interbank_link: row transfers between the banks of one die, used by the
// heterogeneous inter-bank parallelism: duplicating inputs or parameters to
// several banks, handing a step's output to the banks that run the next
// step, and collecting MLP gradient partial sums.
//
// A bank raises tx_req with a destination mask; its r0 is the payload. A
// receiving bank raises rx_ready while it executes RECV and names the bank
// it expects the row from (rx_src), or accepts any sender (rx_any). A
// sender is eligible when every one of its destinations is ready and
// expects it; the link picks one eligible sender (round robin), streams the
// 1 KB row as 64 beats of LINK_BITS = 128 bits, one per cycle, into the
// destination r0 registers (several destinations at once for a broadcast),
// and ends with one cycle of rx_done to the destinations and tx_done to the
// sender. Choosing only eligible senders keeps a receiver from getting a
// row meant for a later RECV and cannot deadlock on a busy receiver. A row
// takes 64 + 1 cycles after the last destination becomes ready. Beat width follows the
// 128-bit per-bank data path of an LPDDR4 die; the arbitration and the
// handshake are this design's choice, the paper only stresses that these
// transfers are slow and should be minimised.
module interbank_link
  import inerf_pkg::*;
#(
  parameter int unsigned N_BANKS = 16,
  parameter int unsigned BW      = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  parameter int unsigned BEATS   = ROW_BITS / LINK_BITS,
  parameter int unsigned KW      = $clog2(BEATS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_BANKS-1:0]   tx_req,
  input  logic [N_BANKS-1:0]   tx_mask [N_BANKS],
  input  row_t                 tx_row  [N_BANKS],
  output logic [N_BANKS-1:0]   tx_done,
  input  logic [N_BANKS-1:0]   rx_ready,
  input  logic [BW-1:0]        rx_src [N_BANKS],
  input  logic [N_BANKS-1:0]   rx_any,
  output logic [N_BANKS-1:0]   rx_beat_we,
  output logic [KW-1:0]        rx_beat_idx,
  output logic [LINK_BITS-1:0] rx_beat,
  output logic [N_BANKS-1:0]   rx_done,
  output logic [31:0]          n_rows,
  output logic [31:0]          n_beats
);
  typedef enum logic [1:0] {L_IDLE, L_XFER, L_DONE} lstate_e;
  lstate_e            st;
  logic [BW-1:0]      src, rr;
  logic [N_BANKS-1:0] dst;
  logic [KW-1:0]      k;

  // A sender is eligible when all its destinations are ready for it.
  logic [N_BANKS-1:0] elig;
  always_comb begin
    for (int s = 0; s < N_BANKS; s++) begin
      elig[s] = tx_req[s];
      for (int d = 0; d < N_BANKS; d++)
        if (d != s && tx_mask[s][d] && !(rx_ready[d] && (rx_any[d] || rx_src[d] == BW'(s))))
          elig[s] = 1'b0;
    end
  end

  // Round-robin pick: first eligible sender at or after rr.
  logic          found;
  logic [BW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int j = 0; j < N_BANKS; j++) begin
      if (!found && elig[BW'((32'(rr) + j) % N_BANKS)]) begin
        found = 1'b1;
        pick  = BW'((32'(rr) + j) % N_BANKS);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= L_IDLE;
      src     <= '0;
      rr      <= '0;
      dst     <= '0;
      k       <= '0;
      n_rows  <= '0;
      n_beats <= '0;
    end else begin
      unique case (st)
        L_IDLE: if (found) begin
          src <= pick;
          dst <= tx_mask[pick] & ~(N_BANKS'(1) << pick);
          rr  <= BW'((32'(pick) + 1) % N_BANKS);
          k   <= '0;
          st  <= L_XFER;
        end
        L_XFER: begin
          n_beats <= n_beats + 1;
          k       <= k + 1'b1;
          if (k == KW'(BEATS - 1)) st <= L_DONE;
        end
        L_DONE: begin
          n_rows <= n_rows + 1;
          st     <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  assign rx_beat_idx = k;
  assign rx_beat     = tx_row[src][k*LINK_BITS +: LINK_BITS];
  assign rx_beat_we  = (st == L_XFER) ? dst : '0;
  assign rx_done     = (st == L_DONE) ? dst : '0;
  assign tx_done     = (st == L_DONE) ? (N_BANKS'(1) << src) : '0;
endmodule
