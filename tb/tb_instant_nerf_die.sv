// tb_instant_nerf_die: end-to-end test of instant_nerf_die with 3 banks (reduced from the die's 16).
//
// One training-step-shaped program is written into row 0.. of every bank's
// DRAM (the same program everywhere; every bank runs it from the common
// start pulse); it spans two DRAM rows, the second reached by a JUMP. It
// exercises the heterogeneous inter-bank parallelism:
//   1. hash-table forward (parameter parallelism): for one level of each
//      level unit, only the owning bank (lvl_gate) loads the point
//      coordinates, hashes the 8 cube vertices of 32 points, gathers the 256
//      embeddings through r0, and interpolates them with 8 multiply-
//      accumulates; the result row is stored locally and sent to bank 0
//      (step-to-step transfer), which receives the rows in unit order
//      (RECV names the sender);
//   2. MLP weights duplication: bank 0 broadcasts its weight row to the
//      other level-owning banks in one link transfer;
//   3. MLP forward (data parallelism): every bank runs a 4x4 layer with
//      ReLU on its own 32 points;
//   4. gradient partial sums: each bank forms a per-lane product, the owners
//      send theirs to bank 0, which adds them up;
//   5. hash-table backward: each owner gathers its embeddings again, adds a
//      gradient row and scatters the result back (dirty r0 write-backs).
// The DRAM arrays are behavioural models that also check DRAM timing.
// References are computed here from the same data with the binary32 model
// of the helper package; MLP data are small dyadic numbers so the sums are
// exact whatever the order. Every mechanism is counted (r0 hits, misses,
// row-buffer conflicts, gated skips, link rows, broadcasts, link waits,
// write-backs, program-row jumps) and one that never happened counts as a
// failure. Banks that own no level unit (when there are more than eight
// banks) take the MLP weights from their own DRAM.
module tb_instant_nerf_die;
  import inerf_pkg::*;
  import inerf_tb_pkg::*;

  localparam int NB   = 3;
  localparam int NU   = (NB < 8) ? NB : 8;   // level units that have an owner bank here
  localparam int SA_W = 3;
  localparam int SA_ROW_W = ROWG_W - SA_W;
  localparam int BW   = (NB > 1) ? $clog2(NB) : 1;
  localparam int REP [8] = '{0, 5, 9, 11, 12, 13, 14, 15};   // one level of each unit

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy;
  dram_cmd_e          dram_cmd   [NB];
  logic [SA_W-1:0]    dram_sa    [NB];
  logic [SA_ROW_W-1:0] dram_row  [NB];
  row_t               dram_wdata [NB], dram_rdata [NB];
  logic [31:0] n_instr [NB], n_hit [NB], n_miss [NB], n_skip [NB], n_act [NB], n_conflict [NB];
  logic [31:0] n_link_rows, n_link_beats;
  int  mem_errors [NB];
  int  n_wr_cmds  [NB];
  bit  go_check = 0;
  int  banks_checked = 0;

  instant_nerf_die #(.N_BANKS(NB)) dut (
    .clk, .rst_n, .start, .start_row(17'd0), .busy,
    .dram_cmd, .dram_sa, .dram_row, .dram_wdata, .dram_rdata,
    .n_instr, .n_hit, .n_miss, .n_skip, .n_act, .n_conflict, .n_link_rows, .n_link_beats
  );
  always #5 clk = ~clk;

  // ---------------- data shared by the program and the references --------
  function automatic logic [31:0] emb(int a);
    return r2f(1.0 + real'(a % 997) / 1000.0);
  endfunction
  function automatic logic [31:0] wgt(int u, int i);
    return r2f(0.5 + real'((i + 13 * u) % 256) / 512.0);
  endfunction
  function automatic int crd(int u, int axis, int p);
    case (axis)
      0: return 300 + 40 * u + p / 3;
      1: return 600 + 7 * u + p / 5;
      default: return 900 + p / 4;
    endcase
  endfunction
  function automatic int lvl_base(int l);
    return (l + 1) << 19;                   // level tables above the program/data rows
  endfunction
  function automatic int haddr(int u, int i);
    int p, v;
    p = i / 8; v = i % 8;
    return int'(32'(morton_ref(crd(u, 0, p) + (v & 1), crd(u, 1, p) + ((v >> 1) & 1),
                               crd(u, 2, p) + (v >> 2), 11)) & 32'h7ffff) + lvl_base(REP[u]);
  endfunction
  function automatic logic [31:0] mlp_w(int w);       // W[k][j] at word 4k+j
    return (w < 16) ? r2f(real'((w * 5) % 8) / 8.0 - 0.375) : 32'h0;
  endfunction
  function automatic logic [31:0] mlp_in(int b, int w); // in[p][k] at word 4p+k
    return (w < 128) ? r2f(real'((w * 3 + b * 7) % 16) / 4.0) : 32'h0;
  endfunction
  function automatic logic [31:0] grad(int b, int i);
    return r2f(real'((i + b) % 9) / 64.0);
  endfunction

  // ---------------- the program ------------------------------------------
  instr_t prog [$];
  int     n_pad = 0;                        // NOPs after a JUMP, never executed
  function automatic void add(instr_t i);
    if (prog.size() % ROW_INSTRS == ROW_INSTRS - 1)
      prog.push_back(mk_imm(OP_JUMP, 36'(prog.size() / ROW_INSTRS + 1)));
    prog.push_back(i);
  endfunction
  // Continue the program at the start of the next DRAM row.
  function automatic void new_row();
    prog.push_back(mk_imm(OP_JUMP, 36'(prog.size() / ROW_INSTRS + 1)));
    while (prog.size() % ROW_INSTRS != 0) begin prog.push_back(mk(OP_NOP)); n_pad++; end
  endfunction
  function automatic void build_prog();
    prog.delete();
    n_pad = 0;
    add(mk_imm(OP_LDROW, 101, 1));
    add(mk_imm(OP_LDHREG, 0, 1));
    // 1. hash-table forward, parameter parallel
    for (int u = 0; u < NU; u++) begin
      logic [3:0] l;
      l = 4'(REP[u]);
      add(mk_imm(OP_LDROW, 36'(110 + u), 0, 1, l));
      add(mk(OP_INT, IOP_HASH, 1, 1, 0, 1, 32, 1, 64, 1, 0, 1, l));
      add(mk_imm(OP_LDADDR, 0, 1, 1, l));
      add(mk_imm(OP_GATHER, 256, 1, 1, l));
      add(mk_imm(OP_LDROW, 36'(120 + u), 0, 1, l));
      add(mk(OP_FP, FOP_CLR, 0, 0, 0, 0, 0, 0, 0, 0, 0, 1, l));
      for (int v = 0; v < 8; v++)
        add(mk(OP_FP, FOP_MAC, 0, v == 7, 9'(256 + v), 8, 9'(v), 8, 0, 0, 0, 1, l));
      add(mk_imm(OP_STROW, 36'(130 + u), 0, 1, l));
      if (u != 0) begin
        add(mk_imm(OP_SEND, 36'd1, 0, 1, l));
        add(mk_imm(OP_RECV, 36'(u), 1, 1, 4'd0));
        add(mk_imm(OP_STROW, 36'(140 + u), 1, 1, 4'd0));
      end
    end
    // 2. MLP weights: local copy, then broadcast from bank 0
    new_row();
    add(mk_imm(OP_LDROW, 150, 1));
    if (NU > 1) begin
      add(mk_imm(OP_SEND, 36'(((1 << NU) - 1) & ~1), 1, 1, 4'd0));
      for (int u = 1; u < NU; u++) add(mk_imm(OP_RECV, 36'd0, 1, 1, 4'(REP[u])));
    end
    // 3. MLP forward, data parallel: out[p][j] = relu(sum_k in[p][k] W[k][j])
    for (int j = 0; j < 4; j++) begin
      add(mk_imm(OP_LDROW, 160, 0));
      add(mk(OP_FP, FOP_CLR));
      for (int k = 0; k < 4; k++)
        add(mk(OP_FP, FOP_MAC, 0, k == 3, 9'(k), 4, 9'(256 + 4 * k + j), 0));
      add(mk(OP_FP, FOP_RELU, 0, 1, 0, 1));
      add(mk_imm(OP_STROW, 36'(170 + j), 0));
    end
    // 4. gradient partial sums reduced at bank 0
    add(mk(OP_FP, FOP_MUL, 0, 1, 0, 1, 256, 1));
    for (int u = 1; u < NU; u++) begin
      add(mk_imm(OP_SEND, 36'd1, 0, 1, 4'(REP[u])));
      add(mk_imm(OP_RECV, 36'(u), 1, 1, 4'd0));
      add(mk(OP_FP, FOP_ADD, 0, 1, 0, 1, 256, 1, 0, 0, 0, 1, 4'd0));
    end
    add(mk_imm(OP_STROW, 180, 0, 1, 4'd0));
    // 5. hash-table backward: embedding update, scattered back
    for (int u = 0; u < NU; u++) begin
      logic [3:0] l;
      l = 4'(REP[u]);
      add(mk_imm(OP_LDROW, 190, 0, 1, l));
      add(mk_imm(OP_GATHER, 256, 1, 1, l));
      add(mk(OP_FP, FOP_ADD, 1, 1, 256, 1, 0, 1, 0, 0, 0, 1, l));
      add(mk_imm(OP_SCATTER, 256, 1, 1, l));
    end
    add(mk(OP_HALT));
  endfunction

  // ---------------- banks: DRAM models, preload and per-bank checks ------
  for (genvar gb = 0; gb < NB; gb++) begin : g_b
    dram_bank_model mem (.clk, .rst_n, .cmd(dram_cmd[gb]), .sa(dram_sa[gb]), .row(dram_row[gb]),
                         .wdata(dram_wdata[gb]), .rdata(dram_rdata[gb]));
    assign mem_errors[gb] = mem.errors;
    assign n_wr_cmds[gb]  = mem.n_wr;

    initial begin
      row_t r;
      int   seen [int];
      build_prog();
      for (int k = 0; k < prog.size(); k++) begin
        if (k % ROW_INSTRS == 0) r = '0;
        r[(k % ROW_INSTRS)*64 +: 64] = prog[k];
        if (k % ROW_INSTRS == ROW_INSTRS - 1 || k == prog.size() - 1) mem.poke(k / ROW_INSTRS, r);
      end
      r = '0;
      for (int l = 0; l < N_LEVELS; l++) r[l*32 +: 32] = 32'(lvl_base(l));
      r[16*32 +: 32] = 32'h7ffff;
      mem.poke(101, r);
      for (int u = 0; u < NU; u++) begin
        r = '0;
        for (int p = 0; p < 32; p++)
          for (int ax = 0; ax < 3; ax++) r[(32*ax + p)*32 +: 32] = 32'(crd(u, ax, p));
        mem.poke(110 + u, r);
        for (int i = 0; i < 256; i++) r[i*32 +: 32] = wgt(u, i);
        mem.poke(120 + u, r);
        if (u == gb) begin                    // owner holds this level's table rows
          for (int i = 0; i < 256; i++) begin
            int a;
            a = haddr(u, i);
            if (!seen.exists(a >> 8)) begin
              seen[a >> 8] = 1;
              for (int w = 0; w < 256; w++) r[w*32 +: 32] = emb((a & ~255) + w);
              mem.poke(a >> 8, r);
            end
          end
        end
      end
      // MLP weights only where no broadcast reaches: bank 0 and non-owners
      r = '0;
      if (gb == 0 || gb >= NU) for (int w = 0; w < 16; w++) r[w*32 +: 32] = mlp_w(w);
      mem.poke(150, r);
      for (int w = 0; w < 256; w++) r[w*32 +: 32] = mlp_in(gb, w);
      mem.poke(160, r);
      for (int i = 0; i < 256; i++) r[i*32 +: 32] = grad(gb, i);
      mem.poke(190, r);

      wait (go_check);
      begin : chk
        int fails0;
        logic [31:0] acc, outv [4][32], e;
        int tab [int];
        fails0 = failures;
        // 1. interpolated features at the owner, and the copies at bank 0
        if (gb < NU) begin
          r = mem.peek(130 + gb);
          for (int p = 0; p < 32; p++) begin
            acc = 32'h0;
            for (int v = 0; v < 8; v++) acc = fadd(acc, fmul(emb(haddr(gb, 8*p + v)), wgt(gb, 8*p + v)));
            checks++; if (r[p*32 +: 32] !== acc) failures++;
          end
          if (gb != 0) begin
            checks++; if (g_b[0].mem.peek(140 + gb) !== r) failures++;
          end
        end
        // 3. MLP outputs
        for (int j = 0; j < 4; j++) begin
          r = mem.peek(170 + j);
          for (int p = 0; p < 32; p++) begin
            acc = 32'h0;
            for (int k = 0; k < 4; k++) acc = fadd(acc, fmul(mlp_in(gb, 4*p + k), mlp_w(4*k + j)));
            if (acc[31]) acc = 32'h0;
            outv[j][p] = acc;
            checks++; if (r[p*32 +: 32] !== acc) failures++;
          end
        end
        // 4. reduced gradient at bank 0: sum over banks 0..NU-1 of out3*W
        if (gb == 0) begin
          r = mem.peek(180);
          for (int p = 0; p < 32; p++) begin
            acc = 32'h0;
            for (int b = 0; b < NU; b++) begin
              logic [31:0] o;
              o = 32'h0;
              for (int k = 0; k < 4; k++) o = fadd(o, fmul(mlp_in(b, 4*p + k), mlp_w(4*k + 3)));
              if (o[31]) o = 32'h0;
              acc = (b == 0) ? fmul(o, mlp_w(p)) : fadd(acc, fmul(o, mlp_w(p)));
            end
            checks++; if (r[p*32 +: 32] !== acc) failures++;
          end
        end
        // 5. updated embeddings (a later lane wins on a repeated address)
        if (gb < NU) begin
          for (int i = 0; i < 256; i++) tab[haddr(gb, i)] = int'(fadd(emb(haddr(gb, i)), grad(gb, i)));
          foreach (tab[a]) begin
            r = mem.peek(a >> 8);
            checks++; if (r[(a & 255)*32 +: 32] !== 32'(tab[a])) failures++;
          end
        end
        checks++; if (mem.errors != 0) failures++;
        if (failures != fails0) $display("FAIL bank %0d: %0d mismatches", gb, failures - fails0);
        banks_checked++;
      end
    end
  end

  // ---------------- mechanism counters -----------------------------------
  int n_bcast = 0, n_link_wait = 0, n_jump = 0, n_wr = 0;
  logic [ROWG_W-1:0] pc_prev = '0;
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.rx_done) > 1) n_bcast++;
    if (|dut.tx_req && !(|dut.rx_beat_we) && !(|dut.tx_done)) n_link_wait++;
    if (dut.g_bank[0].u_bank.u_ctrl.pc_row != pc_prev) n_jump++;
    pc_prev <= dut.g_bank[0].u_bank.u_ctrl.pc_row;
    for (int b = 0; b < NB; b++) if (dram_cmd[b] == CMD_WR) n_wr++;
  end

  function automatic int sum(logic [31:0] x [NB]);
    int s = 0;
    for (int b = 0; b < NB; b++) s += int'(x[b]);
    return s;
  endfunction
  task automatic need(string what, int n);
    $display("  %-28s %0d", what, n);
    checks++; if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  int t0, cycles;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = 0;
    @(posedge clk);
    while (busy) begin @(posedge clk); t0++; end
    cycles = t0;
    go_check = 1;
    wait (banks_checked == NB);
    $display("program: %0d instructions in %0d rows, %0d cycles", prog.size(), (prog.size() + ROW_INSTRS - 1) / ROW_INSTRS, cycles);
    need("r0 hits", sum(n_hit));
    need("r0 misses (gather stalls)", sum(n_miss));
    need("row-buffer conflicts", sum(n_conflict));
    need("gated skips", sum(n_skip));
    need("link row transfers", int'(n_link_rows));
    need("broadcast transfers", n_bcast);
    need("link wait cycles", n_link_wait);
    need("DRAM write commands", n_wr);
    need("program-row jumps", n_jump);
    checks++; if (n_link_rows != 32'(2 * (NU - 1) + (NU > 1))) begin failures++; $display("FAIL link rows %0d", n_link_rows); end
    checks++; if (n_link_beats != 64 * n_link_rows) begin failures++; $display("FAIL link beats"); end
    checks++; if (n_instr[0] != 32'(prog.size() - n_pad)) begin failures++; $display("FAIL bank 0 instr %0d of %0d", n_instr[0], prog.size() - n_pad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
