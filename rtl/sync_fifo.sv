// sync_fifo: synchronous first-in first-out buffer; used as the controller's
// instruction FIFO (DEPTH 128 x 64 bits = one 1 KB program row).
//
// push writes din when not full; pop removes the head (dout shows the head
// combinationally while not empty); flush empties the FIFO. Pushing when
// full or popping when empty is a protocol error caught by assertions.
// Count-based pointers, reset empty. The paper names the instruction FIFO;
// its depth and width are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             flush,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop && !empty) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(push && !full)) - (($clog2(DEPTH+1))'(pop && !empty));
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full && !flush) mem[wp] <= din;
  end

  assign dout  = mem[rp];
  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !flush));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty && !flush));
endmodule
