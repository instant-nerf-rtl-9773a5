// morton_hash: the locality-sensitive 3D hash mapping function.
//
// h(x) = ( f(x0) + (f(x1) << 1) + (f(x2) << 2) ) mod T
//
// f() is "separate one by two": two zero bits are inserted between every
// pair of adjacent coordinate bits, so bit k of x_j lands on bit 3k+j of the
// code. Because the three spread words never overlap, the sum equals their OR
// (a Morton / Z-order code). T = 2^LOG2_T, so "mod T" keeps the low LOG2_T
// bits. Neighbouring grid vertices therefore get nearby table indices, which
// is what makes a cube's eight lookups fall into few DRAM rows.
//
// Purely combinational. The formula is the paper's; the coordinate width
// (11 bits, enough for a 2048^3 finest grid) is this design's choice.
module morton_hash #(
  parameter int unsigned COORD_W = 11,
  parameter int unsigned LOG2_T  = 19
) (
  input  logic [COORD_W-1:0] x0,
  input  logic [COORD_W-1:0] x1,
  input  logic [COORD_W-1:0] x2,
  output logic [LOG2_T-1:0]  idx
);
  localparam int unsigned CODE_W = 3 * COORD_W;

  // Spread each coordinate: bit k moves to bit 3k, the bits between are 0.
  function automatic logic [CODE_W-1:0] spread(logic [COORD_W-1:0] x);
    logic [CODE_W-1:0] r;
    r = '0;
    for (int k = 0; k < COORD_W; k++) r[3*k] = x[k];
    return r;
  endfunction

  logic [CODE_W-1:0] code;
  assign code = spread(x0) + (spread(x1) << 1) + (spread(x2) << 2);

  if (CODE_W >= LOG2_T) begin : g_trunc
    assign idx = code[LOG2_T-1:0];
  end else begin : g_ext
    assign idx = {{(LOG2_T-CODE_W){1'b0}}, code};
  end
endmodule
