// int32_pe: one INT32 processing element of the compute engine.
//
// Its main job is the hash-table index calculation. For IOP_HASH the three
// operands a, b, c are the integer grid corner (x0, x1, x2) of the cube that
// holds a sample point; 'vertex' selects one of the eight cube vertices
// (bit j adds 1 to coordinate j, matching the x^{000}..x^{111} labelling),
// the Morton hash of that vertex is masked to the table size T (hreg_mask =
// T-1) and the level's base address from the hash registers is added, giving
// the word address of the embedding in the bank. The other ops are plain
// integer ADD, SUB, MUL (low 32 bits), AND, SHL, SHR and MOV.
//
// Timing: sampled when 'valid' is high, result registered one cycle later
// with 'y_valid'. Following the paper, the hash parameters come straight from
// the hash registers through a MUX, not from the scratchpad; the op set and
// one-cycle latency are this design's choice.
module int32_pe
  import inerf_pkg::*;
#(
  parameter int unsigned COORD_W = 11,
  parameter int unsigned CODE_W  = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid,
  input  iop_e        op,
  input  logic [2:0]  vertex,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  input  logic [31:0] hreg_base,
  input  logic [31:0] hreg_mask,
  output logic [31:0] y,
  output logic        y_valid
);
  logic [COORD_W-1:0] v0, v1, v2;
  logic [CODE_W-1:0]  code;
  logic [31:0]        res;

  assign v0 = COORD_W'(a) + COORD_W'(vertex[0]);
  assign v1 = COORD_W'(b) + COORD_W'(vertex[1]);
  assign v2 = COORD_W'(c) + COORD_W'(vertex[2]);

  morton_hash #(.COORD_W(COORD_W), .LOG2_T(CODE_W)) u_hash (
    .x0(v0), .x1(v1), .x2(v2), .idx(code)
  );

  always_comb begin
    unique case (op)
      IOP_HASH: res = (32'(code) & hreg_mask) + hreg_base;
      IOP_ADD:  res = a + b;
      IOP_SUB:  res = a - b;
      IOP_MUL:  res = a * b;
      IOP_AND:  res = a & b;
      IOP_SHL:  res = a << b[4:0];
      IOP_SHR:  res = a >> b[4:0];
      default:  res = a;                    // IOP_MOV and unused codes
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= valid;
      if (valid) y <= res;
    end
  end
endmodule
