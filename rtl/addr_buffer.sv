// addr_buffer: the controller's address buffer. It holds the N hash-table
// word addresses computed by the INT32 PEs (one per lane) for the next
// gather or scatter.
//
// 'load' copies a whole scratchpad line (N 32-bit words) in one cycle; the
// bank address generator then reads entry rd_idx combinationally, one per
// memory request. Reset clears it. Parallel load with indexed read is this
// design's choice; the paper only names the buffer.
module addr_buffer
  import inerf_pkg::*;
#(
  parameter int unsigned N = ROW_WORDS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [N*32-1:0]      ldata,
  input  logic [$clog2(N)-1:0] rd_idx,
  output word_t                addr
);
  word_t buf_q [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    for (int i = 0; i < N; i++) buf_q[i] <= '0;
    else if (load) for (int i = 0; i < N; i++) buf_q[i] <= ldata[i*32 +: 32];
  end
  assign addr = buf_q[rd_idx];
endmodule
