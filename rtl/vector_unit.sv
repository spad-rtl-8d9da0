// vector_unit -- VW-wide FP32 SIMD unit of one lane (16 lanes on the Prefill
// Chip, 8 on the Decode Chip, as in the paper's Table 3).
//
// Takes one vector of VW FP32 elements from each of two sources per cycle and
// returns op(a, b) one cycle later (out_valid follows in_valid by one cycle,
// fully pipelined). Operations: add, multiply, maximum and a*scalar + b. The
// last counts two FLOPs per element, which is how VW elements x 2 FLOPs x
// 1.98 GHz x 4 lanes x cores gives the paper's non-tensor TFLOPs (32.4 for the
// Prefill Chip). That op is a multiply, rounded, then an add (not fused).
// Exponential, reciprocal and similar functions that Softmax and LayerNorm
// need are not named by the paper and are not provided.
module vector_unit
  import spad_pkg::*;
#(
  parameter int unsigned VW = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  vop_e                op,
  input  logic [31:0]         scalar,
  input  logic [VW-1:0][31:0] a,
  input  logic [VW-1:0][31:0] b,
  output logic                out_valid,
  output logic [VW-1:0][31:0] y
);

  logic [VW-1:0][31:0] y_d;

  always_comb begin
    for (int i = 0; i < VW; i++) begin
      unique case (op)
        VOP_ADD: y_d[i] = fp32_add(a[i], b[i]);
        VOP_MUL: y_d[i] = fp32_mul(a[i], b[i]);
        VOP_MAX: y_d[i] = fp32_max(a[i], b[i]);
        VOP_FMA: y_d[i] = fp32_add(fp32_mul(a[i], scalar), b[i]);
        default: y_d[i] = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_d;
    end
  end

endmodule
