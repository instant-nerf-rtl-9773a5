// bank_addr_gen: the bank address generator, including the intra-level hash
// table mapping.
//
// A 32-bit bank word address splits into a row number 'rowg' (which 1 KB row
// of the bank) and a column 'col' (word within the row; 256 words per row).
// Rows are then mapped to subarrays: sequential rows go to different
// subarrays, subarray = rowg mod N_SUBARRAYS and row inside the subarray =
// rowg / N_SUBARRAYS. Embeddings with neighbouring hash indices that spill
// into the next row therefore sit in another subarray, whose local row buffer
// can stay open at the same time, instead of conflicting in the same one.
// Combinational. Spreading sequential addresses over subarrays is the
// paper's scheme; the modulo interleave is this design's concrete choice.
module bank_addr_gen
  import inerf_pkg::*;
#(
  parameter int unsigned N_SUBARRAYS = 8
) (
  input  word_t                                  word_addr,
  output logic [ROWG_W-1:0]                      rowg,
  output logic [COL_W-1:0]                       col,
  input  logic [ROWG_W-1:0]                      map_rowg,
  output logic [$clog2(N_SUBARRAYS)-1:0]         sa,
  output logic [ROWG_W-$clog2(N_SUBARRAYS)-1:0]  sa_row
);
  localparam int unsigned SA_W = $clog2(N_SUBARRAYS);

  assign col    = word_addr[COL_W-1:0];
  assign rowg   = word_addr[COL_W +: ROWG_W];
  assign sa     = map_rowg[SA_W-1:0];
  assign sa_row = map_rowg[ROWG_W-1:SA_W];
endmodule
