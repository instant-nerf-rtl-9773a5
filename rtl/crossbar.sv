// crossbar: one operand port of the crossbar between the scratchpad and the
// PE array.
//
// Every one of the N_OUT lanes can read any of the N_IN scratchpad words.
// Which word a lane reads follows an affine pattern set by the instruction:
// lane i reads word (base + j*stride) mod N_IN, where j = i, or j = i/8 when
// grp8 is set (eight consecutive lanes then share one sample point, one lane
// per cube vertex). stride 0 broadcasts one word (e.g. an MLP weight),
// stride 1 is a straight copy. Combinational. The paper shows a full
// crossbar between scratchpad and PEs but not how it is configured; the
// affine pattern is this design's choice. Three copies form the a/b/c ports.
module crossbar
  import inerf_pkg::*;
#(
  parameter int unsigned N_IN  = SPM_WORDS,
  parameter int unsigned N_OUT = ROW_WORDS
) (
  input  word_t                   din [N_IN],
  input  logic [$clog2(N_IN)-1:0] base,
  input  logic [$clog2(N_IN)-1:0] stride,
  input  logic                    grp8,
  output word_t                   dout [N_OUT]
);
  localparam int unsigned AW = $clog2(N_IN);

  for (genvar i = 0; i < N_OUT; i++) begin : g_lane
    logic [AW-1:0] j, sel;
    assign j    = grp8 ? AW'(i / 8) : AW'(i);
    assign sel  = base + AW'(j * stride);
    assign dout[i] = din[sel];
  end
endmodule
