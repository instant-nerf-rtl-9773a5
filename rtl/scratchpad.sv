// scratchpad: the 2 KB scratchpad memory of one bank's compute engine.
//
// 512 32-bit words, organised as two lines of 256 words; a line is exactly
// one 1 KB DRAM row, so a whole row moves between r0 and the scratchpad in
// one cycle through the data MUX. Every word is visible to the crossbar at
// once (it feeds 256 PE lanes per cycle), PE results are written back as a
// whole line, and single words are written during a gather.
//
// Write ports (one used per cycle, priority in this order): line write from
// the data MUX, PE write-back of a line, single-word write. Reads are
// combinational; writes take effect at the clock edge. The 2 KB size is the
// paper's; the two-line organisation and port set are this design's choice.
module scratchpad
  import inerf_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // line write (data MUX)
  input  logic                 line_we,
  input  logic                 line_wsel,
  input  row_t                 line_wdata,
  // line read (data MUX)
  input  logic                 line_rsel,
  output row_t                 line_rdata,
  // PE write-back
  input  logic                 pe_we,
  input  logic                 pe_line,
  input  word_t                pe_wdata [ROW_WORDS],
  // single word write
  input  logic                 word_we,
  input  logic [SPM_AW-1:0]    word_addr,
  input  word_t                word_wdata,
  // all words, to the crossbar
  output word_t                words [SPM_WORDS]
);
  word_t mem [SPM_WORDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SPM_WORDS; i++) mem[i] <= '0;
    end else if (line_we) begin
      for (int i = 0; i < ROW_WORDS; i++)
        mem[{line_wsel, COL_W'(i)}] <= line_wdata[i*WORD_BITS +: WORD_BITS];
    end else if (pe_we) begin
      for (int i = 0; i < ROW_WORDS; i++)
        mem[{pe_line, COL_W'(i)}] <= pe_wdata[i];
    end else if (word_we) begin
      mem[word_addr] <= word_wdata;
    end
  end

  always_comb begin
    for (int i = 0; i < ROW_WORDS; i++)
      line_rdata[i*WORD_BITS +: WORD_BITS] = mem[{line_rsel, COL_W'(i)}];
  end

  assign words = mem;

  // Only one write source is expected per cycle.
  a_one_writer: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({line_we, pe_we, word_we}));
endmodule
