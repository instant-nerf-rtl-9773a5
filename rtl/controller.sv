// controller: the per-bank controller ("Ctroller"). It sequences the compute
// engine and generates the DRAM commands and addresses of its bank.
//
// Parts: an instruction FIFO (sync_fifo, one 1 KB program row = 128 64-bit
// instructions), the instruction decoder (the state machine below), the
// compute engine control signal generator (the combinational decode at the
// end of this file: crossbar patterns, PE op/valid, scratchpad write-back),
// the address buffer (addr_buffer), the bank address generator
// (bank_addr_gen, with the intra-level subarray mapping), the bank command
// generator (bank_cmd_gen) and the input Mux that steers a row from the data
// MUX either into the instruction FIFO or into the address buffer.
//
// Program flow: 'start' fetches DRAM row start_row into r0 and pushes its 128
// instructions into the FIFO (one per cycle), then instructions are popped
// and executed one at a time until HALT, an empty FIFO, or JUMP (which
// fetches another row). Instructions with lvl_gate set run only in the bank
// that owns their hash-table level (level_bank_map); the other banks skip
// them, which lets one program be broadcast to all banks under parameter
// parallelism.
//
// r0 tracking: the controller remembers which DRAM row r0 holds (tag) and
// whether r0 was modified (dirty). A gather or scatter whose word lies in the
// row already in r0 is served from r0 with no DRAM access ("local register
// hit"), which is what the ray-first point order exploits; otherwise a
// dirty r0 is written back first and the new row read. A scatter updates
// words in r0 and the row is written back when r0 is needed for another row
// or the scatter ends.
//
// Instruction latencies (cycles, no DRAM access): INT/FP 3, LDADDR/LDHREG 2,
// gather/scatter hit 1 per word. The component list is the paper's; the ISA,
// the FSM and the r0 tag scheme are this design's own.
module controller
  import inerf_pkg::*;
#(
  parameter int unsigned N_BANKS     = 16,
  parameter int unsigned N_SUBARRAYS = 8,
  parameter int unsigned FIFO_DEPTH  = ROW_INSTRS,
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
  // data transfer MUX
  output dm_sel_e              dm_sel,
  output logic                 dm_line,
  output logic [COL_W-1:0]     dm_col,
  output logic [COL_W-1:0]     dm_idx,
  input  logic                 ctrl_ld,
  input  logic                 ctrl_is_instr,
  input  row_t                 ctrl_row,
  // compute engine control
  output logic [SPM_AW-1:0]    xa_base, xa_stride, xb_base, xb_stride, xc_base,
  output logic                 x_grp8,
  output logic                 int_valid,
  output logic                 fp_valid,
  output iop_e                 iop,
  output fop_e                 fop,
  output logic [2:0]           vertex,
  output logic [3:0]           level,
  input  logic                 pe_y_valid,
  output logic                 pe_wb,
  output logic                 pe_wb_line,
  // r0
  output logic                 r0_ld_dram,
  output logic                 rx_ready,
  output logic [BW-1:0]        rx_src,
  output logic                 rx_any,
  input  logic                 rx_done,
  // DRAM bank
  output dram_cmd_e            dram_cmd,
  output logic [SA_W-1:0]      dram_sa,
  output logic [SA_ROW_W-1:0]  dram_row,
  // inter-bank link
  output logic                 tx_req,
  output logic [N_BANKS-1:0]   tx_mask,
  input  logic                 tx_done,
  // statistics
  output logic [31:0]          n_instr,
  output logic [31:0]          n_hit,
  output logic [31:0]          n_miss,
  output logic [31:0]          n_skip,
  output logic [31:0]          n_act,
  output logic [31:0]          n_conflict
);
  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_PUSH, S_DECODE, S_DISPATCH,
    S_ENSURE, S_WB_REQ, S_WB_WAIT, S_RD_REQ, S_RD_WAIT, S_FLUSH,
    S_LDROW, S_STROW, S_GATHER, S_SCATTER,
    S_EXEC1, S_EXEC2, S_SEND1, S_SEND2, S_RECV1, S_RECV2, S_HALT
  } state_e;

  state_e state, ret_state;
  instr_t ir;
  logic [ROWG_W-1:0] pc_row, tgt;
  logic [7:0]        push_k;
  logic [8:0]        cnt_i, cnt_n;

  logic              wb_then_rd;   // write-back started by S_ENSURE (read follows)
  logic              r0_valid, r0_dirty;
  logic [ROWG_W-1:0] r0_tag;

  // ---------------- instruction FIFO and the input Mux -------------------
  logic   fifo_push, fifo_pop, fifo_empty, fifo_full, fifo_flush;
  instr_t fifo_dout;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  sync_fifo #(.WIDTH(INSTR_BITS), .DEPTH(FIFO_DEPTH)) u_ififo (
    .clk, .rst_n, .flush(fifo_flush),
    .push(fifo_push), .din(ctrl_row[push_k[$clog2(ROW_INSTRS)-1:0]*INSTR_BITS +: INSTR_BITS]),
    .pop(fifo_pop), .dout(fifo_dout), .empty(fifo_empty), .full(fifo_full), .count(fifo_count)
  );

  // ---------------- address buffer + bank address generator ---------------
  word_t             abuf_addr;
  logic [ROWG_W-1:0] a_rowg;
  logic [COL_W-1:0]  a_col;
  logic [ROWG_W-1:0] req_rowg;
  logic [SA_W-1:0]   req_sa;
  logic [SA_ROW_W-1:0] req_row;

  addr_buffer #(.N(ROW_WORDS)) u_abuf (
    .clk, .rst_n, .load(ctrl_ld && !ctrl_is_instr), .ldata(ctrl_row),
    .rd_idx(cnt_i[COL_W-1:0]), .addr(abuf_addr)
  );

  bank_addr_gen #(.N_SUBARRAYS(N_SUBARRAYS)) u_bag (
    .word_addr(abuf_addr), .rowg(a_rowg), .col(a_col),
    .map_rowg(req_rowg), .sa(req_sa), .sa_row(req_row)
  );

  // ---------------- bank command generator ---------------------------------
  logic req_valid, req_ready, req_we, mem_done;
  assign req_rowg = (state == S_WB_REQ || state == S_WB_WAIT) ? r0_tag : tgt;

  bank_cmd_gen #(.N_SUBARRAYS(N_SUBARRAYS)) u_bcg (
    .clk, .rst_n, .req_valid, .req_ready, .req_we,
    .req_sa, .req_row, .done(mem_done),
    .cmd(dram_cmd), .cmd_sa(dram_sa), .cmd_row(dram_row),
    .n_act, .n_conflict
  );

  // ---------------- inter-level mapping ------------------------------------
  logic [2:0]    unit_id;
  logic [BW-1:0] owner;
  level_bank_map #(.N_BANKS(N_BANKS)) u_lbm (.level(ir.level), .unit_id, .owner);

  logic gather_hit;
  assign gather_hit = r0_valid && (r0_tag == a_rowg);

  // ---------------- decoder state machine ----------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ret_state <= S_IDLE;
      ir        <= '0;
      pc_row    <= '0;
      tgt       <= '0;
      push_k    <= '0;
      cnt_i     <= '0;
      cnt_n     <= '0;
      r0_valid  <= 1'b0;
      r0_dirty  <= 1'b0;
      r0_tag    <= '0;
      wb_then_rd <= 1'b0;
      n_instr   <= '0;
      n_hit     <= '0;
      n_miss    <= '0;
      n_skip    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          pc_row <= start_row;
          state  <= S_FETCH;
        end
        // Bring the program row into r0, then push its instructions.
        S_FETCH: begin
          tgt       <= pc_row;
          ret_state <= S_PUSH;
          push_k    <= '0;
          state     <= S_ENSURE;
        end
        S_PUSH: begin
          push_k <= push_k + 1'b1;
          if (push_k == 8'(ROW_INSTRS - 1)) state <= S_DECODE;
        end
        S_DECODE: begin
          if (fifo_empty) state <= S_HALT;
          else begin
            ir      <= fifo_dout;
            n_instr <= n_instr + 1;
            state   <= S_DISPATCH;
          end
        end
        S_DISPATCH: begin
          cnt_i <= '0;
          cnt_n <= (instr_imm(ir)[8:0] == 0) ? 9'd256 : instr_imm(ir)[8:0];
          if (ir.lvl_gate && owner != bank_id) begin
            n_skip <= n_skip + 1;
            state  <= S_DECODE;
          end else begin
            unique case (ir.opcode)
              OP_NOP:     state <= S_DECODE;
              OP_HALT:    state <= S_HALT;
              OP_LDROW:   begin tgt <= instr_imm(ir)[ROWG_W-1:0]; ret_state <= S_LDROW; state <= S_ENSURE; end
              OP_STROW:   begin ret_state <= S_STROW; state <= S_FLUSH; end
              OP_LDADDR:  state <= S_DECODE;          // data MUX moves the line this cycle
              OP_LDHREG:  state <= S_DECODE;
              OP_GATHER:  state <= S_GATHER;
              OP_SCATTER: state <= S_SCATTER;
              OP_INT, OP_FP: state <= S_EXEC1;
              OP_SEND:    begin ret_state <= S_SEND1; state <= S_FLUSH; end
              OP_RECV:    begin ret_state <= S_RECV1; state <= S_FLUSH; end
              OP_JUMP:    begin pc_row <= instr_imm(ir)[ROWG_W-1:0]; state <= S_FETCH; end
              default:    state <= S_DECODE;
            endcase
          end
        end

        // ---- subroutine: make r0 hold row 'tgt', then go to ret_state ----
        S_ENSURE: begin
          wb_then_rd <= 1'b1;
          if (r0_valid && r0_tag == tgt) state <= ret_state;
          else if (r0_valid && r0_dirty)  state <= S_WB_REQ;
          else                            state <= S_RD_REQ;
        end
        S_WB_REQ:  if (req_ready) state <= S_WB_WAIT;
        S_WB_WAIT: if (mem_done) begin
          r0_dirty <= 1'b0;
          // S_FLUSH only writes back; S_ENSURE continues with the read.
          state    <= wb_then_rd ? S_RD_REQ : ret_state;
        end
        S_RD_REQ:  if (req_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (mem_done) begin
          r0_valid <= 1'b1;
          r0_tag   <= tgt;
          r0_dirty <= 1'b0;
          state    <= ret_state;
        end
        // ---- subroutine: write r0 back if dirty, then go to ret_state ----
        S_FLUSH: begin
          wb_then_rd <= 1'b0;
          if (r0_valid && r0_dirty) state <= S_WB_REQ;
          else                      state <= ret_state;
        end

        S_LDROW: state <= S_DECODE;                 // r0 -> scratchpad this cycle
        S_STROW: begin                              // scratchpad -> r0 this cycle
          r0_valid  <= 1'b1;
          r0_tag    <= instr_imm(ir)[ROWG_W-1:0];
          r0_dirty  <= 1'b1;
          ret_state <= S_DECODE;
          state     <= S_FLUSH;
        end

        S_GATHER: begin
          if (cnt_i == cnt_n) state <= S_DECODE;
          else if (gather_hit) begin
            n_hit <= n_hit + 1;
            cnt_i <= cnt_i + 1'b1;
          end else begin
            n_miss    <= n_miss + 1;
            tgt       <= a_rowg;
            ret_state <= S_GATHER;
            state     <= S_ENSURE;
          end
        end
        S_SCATTER: begin
          if (cnt_i == cnt_n) begin
            ret_state <= S_DECODE;
            state     <= S_FLUSH;
          end else if (gather_hit) begin
            n_hit    <= n_hit + 1;
            r0_dirty <= 1'b1;
            cnt_i    <= cnt_i + 1'b1;
          end else begin
            n_miss    <= n_miss + 1;
            tgt       <= a_rowg;
            ret_state <= S_SCATTER;
            state     <= S_ENSURE;
          end
        end

        S_EXEC1: state <= S_EXEC2;
        S_EXEC2: if (pe_y_valid) state <= S_DECODE;

        S_SEND1: begin                              // scratchpad -> r0 this cycle
          r0_valid <= 1'b0;
          state    <= S_SEND2;
        end
        S_SEND2: if (tx_done) state <= S_DECODE;
        S_RECV1: begin
          r0_valid <= 1'b0;
          if (rx_done) state <= S_RECV2;
        end
        S_RECV2: state <= S_DECODE;                 // r0 -> scratchpad this cycle

        S_HALT: begin
          if (r0_valid && r0_dirty) begin
            wb_then_rd <= 1'b0;
            ret_state <= S_HALT;
            state     <= S_WB_REQ;
          end else state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- combinational outputs ----------------------------------
  assign busy       = (state != S_IDLE);
  assign fifo_push  = (state == S_PUSH);
  assign fifo_pop   = (state == S_DECODE) && !fifo_empty;
  assign fifo_flush = (state == S_FETCH);
  assign req_valid  = (state == S_WB_REQ) || (state == S_RD_REQ);
  assign req_we     = (state == S_WB_REQ);
  assign r0_ld_dram = (state == S_RD_WAIT) && mem_done;
  assign rx_ready   = (state == S_RECV1);
  assign rx_src     = BW'(instr_imm(ir));       // RECV: imm[15:0] source bank
  assign rx_any     = instr_imm(ir)[16];        //       imm[16] any source
  assign tx_req     = (state == S_SEND2);
  assign tx_mask    = N_BANKS'(instr_imm(ir));

  // Data transfer MUX control.
  always_comb begin
    dm_sel  = DM_NONE;
    dm_line = ir.line;
    dm_col  = a_col;
    dm_idx  = cnt_i[COL_W-1:0];
    unique case (state)
      S_PUSH:     dm_sel = DM_R0_TO_CTRL;
      S_DISPATCH: if (!(ir.lvl_gate && owner != bank_id)) begin
        if (ir.opcode == OP_LDADDR) dm_sel = DM_SPM_TO_CTRL;
        if (ir.opcode == OP_LDHREG) dm_sel = DM_SPM_TO_HREG;
      end
      S_LDROW:    dm_sel = DM_R0_TO_SPM;
      S_STROW:    dm_sel = DM_SPM_TO_R0;
      S_GATHER:   if (cnt_i != cnt_n && gather_hit) dm_sel = DM_R0_WORD;
      S_SCATTER:  if (cnt_i != cnt_n && gather_hit) dm_sel = DM_SPM_WORD;
      S_SEND1:    dm_sel = DM_SPM_TO_R0;
      S_RECV2:    dm_sel = DM_R0_TO_SPM;
      default: ;
    endcase
  end

  // Compute engine control signal generator.
  assign xa_base    = ir.a_base;
  assign xa_stride  = ir.a_stride;
  assign xb_base    = ir.b_base;
  assign xb_stride  = ir.b_stride;
  assign xc_base    = ir.c_base;
  assign x_grp8     = ir.grp8;
  assign iop        = iop_e'(ir.sub);
  assign fop        = fop_e'(ir.sub);
  assign vertex     = ir.vertex;
  assign level      = ir.level;
  assign int_valid  = (state == S_EXEC1) && (ir.opcode == OP_INT);
  assign fp_valid   = (state == S_EXEC1) && (ir.opcode == OP_FP);
  assign pe_wb      = (state == S_EXEC2) && pe_y_valid && ir.wb;
  assign pe_wb_line = ir.line;

  a_req_handshake: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && !req_ready) |=> req_valid);
  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(fifo_push && fifo_full));
endmodule
