// tb_nmp_bank: one bank's microarchitecture running a program from its own
// DRAM bank (behavioural model). The program does one hash-table level of
// forward and backward work for 32 points on a ray:
//   load coordinates and hash parameters, hash 32 points x 8 cube vertices
//   (INT32 PEs, Morton hash), load the 256 addresses, gather the embeddings,
//   store them, multiply by weights (FP32 PEs), add the product back to the
//   embeddings and scatter them into the table (write-after-read update),
//   skip an instruction of a level owned by another bank, send a row to the
//   inter-bank link, receive one, and jump to a second program row to halt.
// Every stored row and the updated hash table are compared with values
// computed here from reference models; r0 hits and misses, the skip, and
// the DRAM protocol (checked by the model) are checked too.
module tb_nmp_bank;
  import inerf_pkg::*;
  import inerf_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy;
  dram_cmd_e dram_cmd;
  logic [2:0] dram_sa;
  logic [13:0] dram_row;
  row_t dram_wdata, dram_rdata, tx_row;
  logic tx_req, tx_done = 0, rx_ready, rx_any;
  logic [0:0] rx_src;
  logic rx_beat_we = 0, rx_done = 0;
  logic [1:0] tx_mask;
  logic [5:0] rx_beat_idx = 0;
  logic [127:0] rx_beat = 0;
  logic [31:0] n_instr, n_hit, n_miss, n_skip, n_act, n_conflict;
  int checks = 0, failures = 0;

  nmp_bank #(.N_BANKS(2)) dut (
    .clk, .rst_n, .start, .start_row(17'd0), .bank_id(1'b0), .busy,
    .dram_cmd, .dram_sa, .dram_row, .dram_wdata, .dram_rdata,
    .tx_req, .tx_mask, .tx_row, .tx_done, .rx_ready, .rx_src, .rx_any, .rx_beat_we, .rx_beat_idx, .rx_beat, .rx_done,
    .n_instr, .n_hit, .n_miss, .n_skip, .n_act, .n_conflict
  );
  dram_bank_model mem (.clk, .rst_n, .cmd(dram_cmd), .sa(dram_sa), .row(dram_row), .wdata(dram_wdata), .rdata(dram_rdata));
  always #5 clk = ~clk;

  localparam int LEVEL = 3;
  localparam logic [31:0] BASE = 32'(LEVEL) << 19;

  function automatic logic [31:0] emb(int a);
    return r2f(1.0 + real'(a % 997) / 1000.0);
  endfunction
  function automatic logic [31:0] wgt(int i);
    return r2f(0.5 + real'(i) / 512.0);
  endfunction

  row_t prog0, prog1, r, sent, recv_row;
  int   addr [256];
  logic [31:0] g [256], upd [256];
  int   tab_ref [int];      // expected table words after the scatter

  task automatic put(inout row_t p, input int k, input instr_t i);
    p[k*64 +: 64] = i;
  endtask

  initial begin
    int x0 [32], x1 [32], x2 [32];
    int seen [int];
    // ---- data in DRAM ----
    r = '0;
    for (int p = 0; p < 32; p++) begin
      x0[p] = 500 + p / 3; x1[p] = 700 + p / 5; x2[p] = 900 + p / 4;
      r[p*32 +: 32] = 32'(x0[p]); r[(32+p)*32 +: 32] = 32'(x1[p]); r[(64+p)*32 +: 32] = 32'(x2[p]);
    end
    mem.poke(100, r);
    r = '0;
    for (int l = 0; l < 16; l++) r[l*32 +: 32] = 32'(l) << 19;
    r[16*32 +: 32] = 32'h7ffff;
    mem.poke(101, r);
    r = '0;
    for (int i = 0; i < 256; i++) r[i*32 +: 32] = wgt(i);
    mem.poke(102, r);
    for (int i = 0; i < 256; i++) begin
      int p, v;
      p = i / 8; v = i % 8;
      addr[i] = int'((32'(morton_ref(x0[p] + (v & 1), x1[p] + ((v >> 1) & 1), x2[p] + (v >> 2), 11)) & 32'h7ffff) + BASE);
      if (!seen.exists(addr[i] >> 8)) begin
        seen[addr[i] >> 8] = 1;
        for (int w = 0; w < 256; w++) r[w*32 +: 32] = emb((addr[i] & ~255) + w);
        mem.poke(addr[i] >> 8, r);
      end
      g[i]   = emb(addr[i]);
      upd[i] = fadd(g[i], fmul(g[i], wgt(i)));
    end
    foreach (addr[i]) tab_ref[addr[i]] = int'(upd[i]);   // later lanes overwrite
    $display("distinct rows touched by 256 lookups: %0d", seen.num());
    // ---- program ----
    prog0 = '0; prog1 = '0;
    put(prog0, 0,  mk_imm(OP_LDROW, 100, 0));
    put(prog0, 1,  mk_imm(OP_LDROW, 101, 1));
    put(prog0, 2,  mk_imm(OP_LDHREG, 0, 1));
    put(prog0, 3,  mk(OP_INT, IOP_HASH, 1, 1, 0, 1, 32, 1, 64, 1, 0, 0, 4'(LEVEL)));
    put(prog0, 4,  mk_imm(OP_LDADDR, 0, 1));
    put(prog0, 5,  mk_imm(OP_GATHER, 256, 0));
    put(prog0, 6,  mk_imm(OP_STROW, 200, 0));
    put(prog0, 7,  mk_imm(OP_LDROW, 102, 1));
    put(prog0, 8,  mk(OP_FP, FOP_MUL, 1, 1, 0, 1, 256, 1));
    put(prog0, 9,  mk_imm(OP_STROW, 201, 1));
    put(prog0, 10, mk(OP_FP, FOP_ADD, 1, 1, 0, 1, 256, 1));
    put(prog0, 11, mk_imm(OP_SCATTER, 256, 1));
    put(prog0, 12, mk(OP_INT, IOP_HASH, 1, 1, 0, 1, 32, 1, 64, 1, 0, 1, 4'd5));
    put(prog0, 13, mk_imm(OP_SEND, 2, 0));
    put(prog0, 14, mk_imm(OP_RECV, 36'h1_0000, 1));  // any source
    put(prog0, 15, mk_imm(OP_STROW, 202, 1));
    put(prog0, 16, mk_imm(OP_JUMP, 1));
    put(prog1, 0,  mk(OP_NOP));
    put(prog1, 1,  mk(OP_HALT));
    mem.poke(0, prog0);
    mem.poke(1, prog1);
    for (int i = 0; i < 256; i++) recv_row[i*32 +: 32] = $urandom;

    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // act as the inter-bank link
    fork
      begin
        wait (tx_req); repeat (5) @(posedge clk);
        sent = tx_row;
        checks++; if (tx_mask !== 2'b10) begin failures++; $display("FAIL tx_mask"); end
        @(negedge clk); tx_done = 1; @(negedge clk); tx_done = 0;
      end
      begin
        wait (rx_ready);
        checks++; if (rx_any !== 1'b1) begin failures++; $display("FAIL rx_any"); end
        for (int k = 0; k < 64; k++) begin
          @(negedge clk); rx_beat_we = 1; rx_beat_idx = 6'(k); rx_beat = recv_row[k*128 +: 128];
        end
        @(negedge clk); rx_beat_we = 0; rx_done = 1; @(negedge clk); rx_done = 0;
      end
    join
    while (busy) @(posedge clk);
    // ---- checks ----
    r = mem.peek(200);
    for (int i = 0; i < 256; i++) begin checks++; if (r[i*32 +: 32] !== g[i]) begin failures++; if (failures < 5) $display("FAIL gather %0d", i); end end
    r = mem.peek(201);
    for (int i = 0; i < 256; i++) begin checks++; if (r[i*32 +: 32] !== fmul(g[i], wgt(i))) begin failures++; if (failures < 5) $display("FAIL mul %0d", i); end end
    foreach (tab_ref[a]) begin
      r = mem.peek(a >> 8);
      checks++; if (r[(a & 255)*32 +: 32] !== 32'(tab_ref[a])) begin failures++; if (failures < 8) $display("FAIL scatter addr %0d", a); end
    end
    checks++; if (sent !== mem.peek(200)) begin failures++; $display("FAIL sent row"); end
    checks++; if (mem.peek(202) !== recv_row) begin failures++; $display("FAIL received row"); end
    checks++; if (n_skip != 1) begin failures++; $display("FAIL skip %0d", n_skip); end
    checks++; if (n_instr != 19) begin failures++; $display("FAIL instr count %0d", n_instr); end
    checks++; if (n_hit == 0 || n_miss == 0) begin failures++; $display("FAIL hit/miss %0d %0d", n_hit, n_miss); end
    checks++; if (mem.errors != 0) begin failures++; $display("FAIL dram errors"); end
    $display("r0 hits %0d misses %0d activations %0d conflicts %0d", n_hit, n_miss, n_act, n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
