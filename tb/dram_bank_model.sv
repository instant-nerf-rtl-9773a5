// dram_bank_model: behavioural model of one DRAM bank with subarrays, for
// simulation only (not synthesizable). Each subarray has a local row buffer
// that ACT fills from the cell array; RD copies the open local row buffer to
// the global row buffer (rdata); WR writes wdata into the open row; PRE
// closes the subarray. Rows are stored sparsely (associative array, zero
// when never written). It also checks the command protocol (column command
// to a closed subarray, ACT to an open one) and the T_RCD / T_RP / T_RAS
// spacing, counting violations in 'errors'. poke/peek give the testbench
// direct access by bank row number (rowg), with the same subarray
// interleave as the address generator.
module dram_bank_model
  import inerf_pkg::*;
#(
  parameter int unsigned N_SUBARRAYS = 8,
  parameter int unsigned SA_W        = $clog2(N_SUBARRAYS),
  parameter int unsigned SA_ROW_W    = ROWG_W - SA_W,
  parameter int unsigned T_RCD = 4,
  parameter int unsigned T_RP  = 6,
  parameter int unsigned T_RAS = 9
) (
  input  logic                clk,
  input  logic                rst_n,     // commands are ignored during reset
  input  dram_cmd_e           cmd,
  input  logic [SA_W-1:0]     sa,
  input  logic [SA_ROW_W-1:0] row,
  input  row_t                wdata,
  output row_t                rdata
);
  row_t mem [int];
  logic open_q [N_SUBARRAYS];
  int   orow   [N_SUBARRAYS];
  longint t_act [N_SUBARRAYS];
  longint t_pre;
  longint now = 0;
  int errors = 0, n_rd = 0, n_wr = 0, n_act_seen = 0;

  function automatic int key(int s, int r);
    return r * N_SUBARRAYS + s;     // = rowg
  endfunction

  function automatic row_t peek(int rowg);
    if (mem.exists(rowg)) return mem[rowg];
    return '0;
  endfunction
  function automatic void poke(int rowg, row_t d);
    mem[rowg] = d;
  endfunction

  initial begin
    rdata = '0;
    t_pre = -100;
    for (int s = 0; s < N_SUBARRAYS; s++) begin
      open_q[s] = 1'b0; orow[s] = 0; t_act[s] = -100;
    end
  end

  always @(posedge clk) begin
    now++;
    if (rst_n) unique case (cmd)
      CMD_ACT: begin
        n_act_seen++;
        if (open_q[sa]) begin errors++; $display("DRAM: ACT to open subarray %0d", sa); end
        if (now - t_pre < T_RP) begin errors++; $display("DRAM: tRP violated"); end
        open_q[sa] = 1'b1; orow[sa] = int'(row); t_act[sa] = now;
      end
      CMD_RD: begin
        n_rd++;
        if (!open_q[sa] || orow[sa] != int'(row)) begin errors++; $display("DRAM: RD to closed row sa=%0d row=%0d open=%b orow=%0d t=%0d", sa, row, open_q[sa], orow[sa], now); end
        if (now - t_act[sa] < T_RCD) begin errors++; $display("DRAM: tRCD violated"); end
        rdata <= peek(key(int'(sa), int'(row)));
      end
      CMD_WR: begin
        n_wr++;
        if (!open_q[sa] || orow[sa] != int'(row)) begin errors++; $display("DRAM: WR to closed row"); end
        if (now - t_act[sa] < T_RCD) begin errors++; $display("DRAM: tRCD violated"); end
        mem[key(int'(sa), int'(row))] = wdata;
      end
      CMD_PRE: begin
        if (now - t_act[sa] < T_RAS) begin errors++; $display("DRAM: tRAS violated"); end
        open_q[sa] = 1'b0; t_pre = now;
      end
      default: ;
    endcase
  end
endmodule
