// row_register: r0, the row-buffer sized (1 KB) register that connects the
// bank's global row buffer to the data transfer MUX.
//
// Load sources, highest priority first: a row read from the DRAM bank
// (ld_dram), a row from the data MUX (ld_mux), one 128-bit beat from the
// inter-bank link (beat_we/beat_idx, 64 beats per row) and one 32-bit word
// from the data MUX (word_we/word_idx, used to update embeddings in place
// during a scatter). q drives the global row buffer on DRAM writes, the data
// MUX and the inter-bank link. Reset clears it. The register itself is the
// paper's (r0); the beat and word ports are this design's choice.
module row_register
  import inerf_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              ld_dram,
  input  row_t                              dram_d,
  input  logic                              ld_mux,
  input  row_t                              mux_d,
  input  logic                              beat_we,
  input  logic [$clog2(ROW_BITS/LINK_BITS)-1:0] beat_idx,
  input  logic [LINK_BITS-1:0]              beat_d,
  input  logic                              word_we,
  input  logic [COL_W-1:0]                  word_idx,
  input  word_t                             word_d,
  output row_t                              q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        q <= '0;
    else if (ld_dram)  q <= dram_d;
    else if (ld_mux)   q <= mux_d;
    else if (beat_we)  q[beat_idx*LINK_BITS +: LINK_BITS] <= beat_d;
    else if (word_we)  q[word_idx*WORD_BITS +: WORD_BITS] <= word_d;
  end
endmodule
