// fp32_pe: one FP32 processing element of the compute engine.
//
// Does the floating-point work of NeRF training that is not index
// arithmetic: trilinear interpolation (multiply-accumulate of eight vertex
// embeddings with their weights), MLP forward and backward passes
// (multiply-accumulate, ReLU, ReLU gradient) and embedding gradient updates
// (add). Operations (inerf_pkg::fop_e): MUL, ADD, SUB, MAC, MADD, FLOOR,
// I2F, RELU, DRELU, CLR, MOV.
//
// Timing: operands and op are sampled when 'valid' is high; 'y' is a
// register that holds the result one cycle later, 'y_valid' marks it. The
// accumulator 'acc' is updated by MAC (acc += a*b, y = new acc) and cleared by
// CLR or reset. The one-cycle latency and the op set are this design's own
// choice; the paper fixes only the FP32 data type and the PE count.
module fp32_pe
  import inerf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid,
  input  fop_e        op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  output logic [31:0] y,
  output logic        y_valid
);
  logic [31:0] acc;
  logic [31:0] prod, add_x, add_y, add_o, f2i, i2f, res;

  fp32_mul u_mul (.a(a), .b(b), .y(prod));
  fp32_add u_add (.a(add_x), .b(add_y), .y(add_o));
  fp32_cvt u_cvt (.a(a), .f2i(f2i), .i2f(i2f));

  // One shared adder: its inputs depend on the operation.
  always_comb begin
    unique case (op)
      FOP_ADD:  begin add_x = a;    add_y = b;                 end
      FOP_SUB:  begin add_x = a;    add_y = {~b[31], b[30:0]}; end
      FOP_MAC:  begin add_x = acc;  add_y = prod;              end
      FOP_MADD: begin add_x = prod; add_y = c;                 end
      default:  begin add_x = a;    add_y = b;                 end
    endcase
  end

  always_comb begin
    unique case (op)
      FOP_MUL:   res = prod;
      FOP_ADD, FOP_SUB, FOP_MAC, FOP_MADD: res = add_o;
      FOP_FLOOR: res = f2i;
      FOP_I2F:   res = i2f;
      FOP_RELU:  res = (a[31] || a[30:0] == '0) ? 32'd0 : a;
      FOP_DRELU: res = (a[31] || a[30:0] == '0) ? 32'd0 : b;
      FOP_CLR:   res = 32'd0;
      default:   res = a;                   // FOP_MOV and unused codes
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= valid;
      if (valid) begin
        y <= res;
        if (op == FOP_MAC) acc <= add_o;
        else if (op == FOP_CLR) acc <= '0;
      end
    end
  end
endmodule
