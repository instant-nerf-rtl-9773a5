// pe_array: the PE array of one bank's compute engine: a group of N_INT
// INT32 PEs (hash index calculation) and a group of N_FP FP32 PEs (all
// other arithmetic), i.e. the mixed-precision computation logic.
//
// Lane i of both groups receives operand lane i of the three crossbar ports
// (a, b, c). Only one group runs per instruction (int_valid or fp_valid);
// 'y' returns that group's results one cycle later with y_valid. The hash
// parameters reach the INT32 PEs directly from the hash registers through a
// MUX: for IOP_HASH they get the level's base and mask, for other integer
// ops zeros. With grp8 set, INT32 lane i hashes cube vertex
// (vertex XOR i[2:0]), so 8 consecutive lanes cover one point's 8 vertices
// and 256 lanes cover 32 points at once. The group sizes are the paper's;
// the lane sharing and the grp8 vertex assignment are this design's choice.
module pe_array
  import inerf_pkg::*;
#(
  parameter int unsigned N_INT = 256,
  parameter int unsigned N_FP  = 256,
  parameter int unsigned N     = (N_INT > N_FP) ? N_INT : N_FP
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        int_valid,
  input  logic        fp_valid,
  input  iop_e        iop,
  input  fop_e        fop,
  input  logic [2:0]  vertex,
  input  logic        grp8,
  input  word_t       hreg_base,
  input  word_t       hreg_mask,
  input  word_t       a [N],
  input  word_t       b [N],
  input  word_t       c [N],
  output word_t       y [N],
  output logic        y_valid
);
  word_t yi [N_INT];
  word_t yf [N_FP];
  logic  vi [N_INT];
  logic  vf [N_FP];
  logic  int_sel;                 // which group produced the last result
  word_t hb, hm;

  // MUX between the hash registers and the INT32 PEs.
  assign hb = (iop == IOP_HASH) ? hreg_base : '0;
  assign hm = (iop == IOP_HASH) ? hreg_mask : '0;

  for (genvar i = 0; i < N_INT; i++) begin : g_int
    int32_pe u_pe (
      .clk, .rst_n, .valid(int_valid), .op(iop),
      .vertex(grp8 ? (vertex ^ 3'(i)) : vertex),
      .a(a[i]), .b(b[i]), .c(c[i]), .hreg_base(hb), .hreg_mask(hm),
      .y(yi[i]), .y_valid(vi[i])
    );
  end

  for (genvar i = 0; i < N_FP; i++) begin : g_fp
    fp32_pe u_pe (
      .clk, .rst_n, .valid(fp_valid), .op(fop),
      .a(a[i]), .b(b[i]), .c(c[i]), .y(yf[i]), .y_valid(vf[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         int_sel <= 1'b0;
    else if (int_valid) int_sel <= 1'b1;
    else if (fp_valid)  int_sel <= 1'b0;
  end

  for (genvar i = 0; i < N; i++) begin : g_out
    if (i < N_INT && i < N_FP) begin : g_both
      assign y[i] = int_sel ? yi[i] : yf[i];
    end else if (i < N_INT) begin : g_int_only
      assign y[i] = int_sel ? yi[i] : '0;
    end else begin : g_fp_only
      assign y[i] = int_sel ? '0 : yf[i];
    end
  end
  assign y_valid = vi[0] | vf[0];

  a_one_group: assert property (@(posedge clk) disable iff (!rst_n) !(int_valid && fp_valid));
endmodule
