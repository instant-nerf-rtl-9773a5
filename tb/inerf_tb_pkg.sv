// inerf_tb_pkg: helpers shared by the testbenches: instruction assembly,
// a binary32 reference (via double-precision reals, rounded to nearest even,
// subnormals flushed), and a bit-level Morton hash reference.
package inerf_tb_pkg;
  import inerf_pkg::*;

  function automatic instr_t mk(opcode_e op, logic [3:0] sub = 0, logic line = 0, logic wb = 0,
                                logic [8:0] ab = 0, logic [8:0] as_ = 0,
                                logic [8:0] bb = 0, logic [8:0] bs = 0, logic [8:0] cb = 0,
                                logic grp8 = 0, logic [2:0] vertex = 0,
                                logic lvl_gate = 0, logic [3:0] level = 0);
    instr_t i;
    i = '0;
    i.opcode = op; i.sub = sub; i.line = line; i.wb = wb;
    i.a_base = ab; i.a_stride = as_; i.b_base = bb; i.b_stride = bs; i.c_base = cb;
    i.grp8 = grp8; i.vertex = vertex; i.lvl_gate = lvl_gate; i.level = level;
    return i;
  endfunction

  // Memory-type instruction with a 36-bit immediate.
  function automatic instr_t mk_imm(opcode_e op, logic [35:0] imm, logic line = 0,
                                    logic lvl_gate = 0, logic [3:0] level = 0);
    instr_t i;
    i = '0;
    i.opcode = op; i.line = line; i.lvl_gate = lvl_gate; i.level = level;
    {i.a_base, i.a_stride, i.b_base, i.b_stride} = imm;
    return i;
  endfunction

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) + 896), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        g, st;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b0, d[51:29]};
    g = d[28]; st = |d[27:0];
    if (g && (st || d[29])) m = m + 1;
    if (m[23]) e = e + 1;
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] fmul(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction
  function automatic logic [31:0] fadd(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic longint unsigned morton_ref(int a, int b, int c, int bits);
    longint unsigned r = 0;
    for (int k = 0; k < bits; k++) begin
      r |= longint'((a >> k) & 1) << (3*k);
      r |= longint'((b >> k) & 1) << (3*k+1);
      r |= longint'((c >> k) & 1) << (3*k+2);
    end
    return r;
  endfunction
endpackage
