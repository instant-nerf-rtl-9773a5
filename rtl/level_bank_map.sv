// level_bank_map: the inter-level hash table mapping. Hash table levels are
// clustered into units of similar processing time and each unit is owned by
// one bank (parameter parallelism: each bank keeps part of the table).
//
// Units: levels 0-4 -> unit 0, levels 5-8 -> unit 1, levels 9-10 -> unit 2,
// levels 11..15 -> units 3..7 (one level each). Unit u is owned by bank
// u mod N_BANKS. Combinational. The three groups are the paper's; the unit
// numbering and the bank assignment (the paper says only that the groups
// and remaining levels go to different banks) are this design's choice.
module level_bank_map #(
  parameter int unsigned N_BANKS = 16
) (
  input  logic [3:0]                     level,
  output logic [2:0]                     unit_id,
  output logic [$clog2(N_BANKS)-1:0]     owner
);
  always_comb begin
    if (level <= 4'd4)       unit_id = 3'd0;
    else if (level <= 4'd8)  unit_id = 3'd1;
    else if (level <= 4'd10) unit_id = 3'd2;
    else                     unit_id = 3'(level - 4'd8);
  end
  assign owner = $clog2(N_BANKS)'(32'(unit_id) % N_BANKS);
endmodule
