// hash_regs: registers holding the pre-defined parameters of the hash
// mapping function, read directly by the INT32 PEs.
//
// For each of the N_LEVELS resolution levels a base word address (where that
// level's table starts in this bank) and one table mask T-1 shared by all
// levels (T = 2^19 entries by default). They are loaded in one cycle from a
// scratchpad line through the data MUX: words 0..N_LEVELS-1 are the level
// bases, word N_LEVELS is the mask. The output MUX selects the level named
// by the current instruction. Reset: all bases 0, mask 2^19-1. The paper
// says only that these registers hold the hash function's parameters; the
// register contents and loading are this design's choice.
module hash_regs
  import inerf_pkg::*;
#(
  parameter int unsigned LOG2_T = 19
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         load,
  input  row_t                         ldata,
  input  logic [$clog2(N_LEVELS)-1:0]  level,
  output word_t                        base,
  output word_t                        mask
);
  word_t base_q [N_LEVELS];
  word_t mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LEVELS; l++) base_q[l] <= '0;
      mask_q <= word_t'((64'd1 << LOG2_T) - 1);
    end else if (load) begin
      for (int l = 0; l < N_LEVELS; l++) base_q[l] <= ldata[l*WORD_BITS +: WORD_BITS];
      mask_q <= ldata[N_LEVELS*WORD_BITS +: WORD_BITS];
    end
  end

  assign base = base_q[level];
  assign mask = mask_q;
endmodule
