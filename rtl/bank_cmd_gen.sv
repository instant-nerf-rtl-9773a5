// bank_cmd_gen: the bank command generator. It turns one row request of the
// controller (read a row into r0, or write r0 into a row) into the DRAM
// command sequence PRE / ACT / RD or WR for the addressed subarray, and
// enforces the DRAM timing of the evaluated LPDDR4-2400 configuration.
//
// Subarray-level parallelism: every subarray keeps its own open row in its
// local row buffer (open-page policy), so a request to a row that is already
// open in its subarray needs only the column command, and rows in different
// subarrays do not close each other. A request to another row of the same
// subarray is a conflict: PRE, then ACT, then the column command.
//
// Constraints, in controller clock cycles: T_RAS (ACT->PRE), T_WR (WR->PRE),
// T_RP (PRE->ACT, per bank), T_RCD (ACT->RD/WR), T_CCD (column->column),
// T_RRD (ACT->ACT), T_FAW (at most four ACTs in any T_FAW window). RD moves
// the local row buffer to the global row buffer and r0 in T_RA cycles, WR
// the other way in T_WA cycles; 'done' pulses when that has finished (the
// controller loads r0 from the DRAM data on a read's 'done').
//
// Handshake: req_valid/req_ready (accepted in IDLE), then one 'done' pulse.
// Statistics: n_act counts row activations, n_conflict requests that found
// another row open in their subarray. The timing values are the paper's
// (Table 3); that they count controller cycles, and the open-page policy,
// are this design's assumptions.
module bank_cmd_gen
  import inerf_pkg::*;
#(
  parameter int unsigned N_SUBARRAYS = 8,
  parameter int unsigned SA_ROW_W    = ROWG_W - $clog2(N_SUBARRAYS),
  parameter int unsigned T_RCD = 4,
  parameter int unsigned T_RAS = 9,
  parameter int unsigned T_RP  = 6,
  parameter int unsigned T_WR  = 6,
  parameter int unsigned T_CCD = 8,
  parameter int unsigned T_RRD = 2,
  parameter int unsigned T_FAW = 9,
  parameter int unsigned T_RA  = 2,
  parameter int unsigned T_WA  = 7
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            req_valid,
  output logic                            req_ready,
  input  logic                            req_we,
  input  logic [$clog2(N_SUBARRAYS)-1:0]  req_sa,
  input  logic [SA_ROW_W-1:0]             req_row,
  output logic                            done,
  output dram_cmd_e                       cmd,
  output logic [$clog2(N_SUBARRAYS)-1:0]  cmd_sa,
  output logic [SA_ROW_W-1:0]             cmd_row,
  output logic [31:0]                     n_act,
  output logic [31:0]                     n_conflict
);
  localparam int unsigned SA_W = $clog2(N_SUBARRAYS);
  localparam int unsigned CW   = 5;   // timer width, all constraints < 32

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_PRE, S_ACT, S_COL, S_XFER} state_e;
  state_e state;

  logic                 we_q;
  logic [SA_W-1:0]      sa_q;
  logic [SA_ROW_W-1:0]  row_q;

  // Per-subarray state and countdown timers (0 = constraint met).
  logic                 open_q   [N_SUBARRAYS];
  logic [SA_ROW_W-1:0]  orow_q   [N_SUBARRAYS];
  logic [CW-1:0]        ras_t    [N_SUBARRAYS];
  logic [CW-1:0]        wr_t     [N_SUBARRAYS];
  logic [CW-1:0]        rcd_t    [N_SUBARRAYS];
  // Bank-wide timers.
  logic [CW-1:0]        rp_t, ccd_t, rrd_t, xfer_t;
  logic [CW-1:0]        faw_t [4];  // time left until each of the last 4 ACTs leaves the window

  logic can_pre, can_act, can_col;
  assign can_pre = (ras_t[sa_q] == 0) && (wr_t[sa_q] == 0);
  assign can_act = (rp_t == 0) && (rrd_t == 0) && (faw_t[3] == 0);
  assign can_col = (rcd_t[sa_q] == 0) && (ccd_t == 0);

  function automatic logic [CW-1:0] dec(logic [CW-1:0] t);
    return (t == 0) ? t : t - 1'b1;
  endfunction

  assign req_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      we_q       <= 1'b0;
      sa_q       <= '0;
      row_q      <= '0;
      rp_t       <= '0;
      ccd_t      <= '0;
      rrd_t      <= '0;
      xfer_t     <= '0;
      for (int k = 0; k < 4; k++) faw_t[k] <= '0;
      for (int s = 0; s < N_SUBARRAYS; s++) begin
        open_q[s] <= 1'b0; orow_q[s] <= '0;
        ras_t[s] <= '0; wr_t[s] <= '0; rcd_t[s] <= '0;
      end
      cmd        <= CMD_NOP;
      cmd_sa     <= '0;
      cmd_row    <= '0;
      done       <= 1'b0;
      n_act      <= '0;
      n_conflict <= '0;
    end else begin
      // Timers run down every cycle; an issued command reloads them below.
      rp_t   <= dec(rp_t);
      ccd_t  <= dec(ccd_t);
      rrd_t  <= dec(rrd_t);
      xfer_t <= dec(xfer_t);
      for (int k = 0; k < 4; k++) faw_t[k] <= dec(faw_t[k]);
      for (int s = 0; s < N_SUBARRAYS; s++) begin
        ras_t[s] <= dec(ras_t[s]);
        wr_t[s]  <= dec(wr_t[s]);
        rcd_t[s] <= dec(rcd_t[s]);
      end
      cmd  <= CMD_NOP;
      done <= 1'b0;

      unique case (state)
        S_IDLE: if (req_valid) begin
          we_q  <= req_we;
          sa_q  <= req_sa;
          row_q <= req_row;
          state <= S_CHECK;
        end
        S_CHECK: begin
          if (open_q[sa_q] && orow_q[sa_q] == row_q) state <= S_COL;
          else if (open_q[sa_q]) begin
            state      <= S_PRE;
            n_conflict <= n_conflict + 1;
          end
          else state <= S_ACT;
        end
        S_PRE: if (can_pre) begin
          cmd          <= CMD_PRE;
          cmd_sa       <= sa_q;
          cmd_row      <= orow_q[sa_q];
          open_q[sa_q] <= 1'b0;
          rp_t         <= CW'(T_RP - 1);
          state        <= S_ACT;
        end
        S_ACT: if (can_act) begin
          cmd          <= CMD_ACT;
          cmd_sa       <= sa_q;
          cmd_row      <= row_q;
          open_q[sa_q] <= 1'b1;
          orow_q[sa_q] <= row_q;
          ras_t[sa_q]  <= CW'(T_RAS - 1);
          rcd_t[sa_q]  <= CW'(T_RCD - 1);
          rrd_t        <= CW'(T_RRD - 1);
          faw_t[0]     <= CW'(T_FAW - 1);
          for (int k = 1; k < 4; k++) faw_t[k] <= dec(faw_t[k-1]);
          n_act        <= n_act + 1;
          state        <= S_COL;
        end
        S_COL: if (can_col) begin
          cmd     <= we_q ? CMD_WR : CMD_RD;
          cmd_sa  <= sa_q;
          cmd_row <= row_q;
          ccd_t   <= CW'(T_CCD - 1);
          if (we_q) wr_t[sa_q] <= CW'(T_WA + T_WR - 1);
          xfer_t  <= CW'((we_q ? T_WA : T_RA) - 1);
          state   <= S_XFER;
        end
        S_XFER: if (xfer_t == 0) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
