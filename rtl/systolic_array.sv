// systolic_array -- DIM x DIM FP16 systolic array of one lane (32 x 32 on the
// Prefill Chip, 16 x 16 on the Decode Chip, as in the paper's Table 3).
//
// Computes C = A x B for A of DIM x K and B of K x DIM. Each cycle with
// in_valid the caller presents column k of A (a_col[i] = A[i][k]) and row k of
// B (b_row[j] = B[k][j]), unskewed; input skew registers delay row i of A by i
// cycles and column j of B by j cycles so that A[i][k] and B[k][j] meet in
// PE(i,j). One column/row is accepted per cycle, so K columns stream in K
// cycles and the last product lands in PE(DIM-1,DIM-1) 2*(DIM-1) cycles after
// the last input (busy is high until then). Results stay in the PEs (output
// stationary): each drain pulse shifts every column up by one row, and c_row
// always shows the current top row, so DIM pulses read out rows 0..DIM-1.
// clear zeroes all accumulators. The paper specifies the size and the
// FP16/BF16 precision; dataflow, skewing and read-out are this design's.
module systolic_array
  import spad_pkg::*;
#(
  parameter int unsigned DIM = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               drain,
  input  logic               in_valid,
  input  logic [DIM-1:0][15:0] a_col,
  input  logic [DIM-1:0][15:0] b_row,
  output logic [DIM-1:0][31:0] c_row,
  output logic               busy
);

  // Skewed operands entering column 0 (A) and row 0 (B).
  logic [DIM-1:0][15:0] a_skew;
  logic [DIM-1:0]       v_skew;
  logic [DIM-1:0][15:0] b_skew;

  for (genvar i = 0; i < DIM; i++) begin : g_skew
    if (i == 0) begin : g_direct
      assign a_skew[0] = a_col[0];
      assign v_skew[0] = in_valid;
      assign b_skew[0] = b_row[0];
    end else begin : g_delay
      logic [i-1:0][15:0] a_sr, b_sr;
      logic [i-1:0]       v_sr;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          a_sr <= '0;
          b_sr <= '0;
          v_sr <= '0;
        end else begin
          a_sr[0] <= a_col[i];
          b_sr[0] <= b_row[i];
          v_sr[0] <= in_valid;
          for (int s = 1; s < i; s++) begin
            a_sr[s] <= a_sr[s-1];
            b_sr[s] <= b_sr[s-1];
            v_sr[s] <= v_sr[s-1];
          end
        end
      end
      assign a_skew[i] = a_sr[i-1];
      assign b_skew[i] = b_sr[i-1];
      assign v_skew[i] = v_sr[i-1];
    end
  end

  // Mesh wires: a/valid flow right, b flows down, accumulators shift up.
  logic [15:0] a_w   [DIM][DIM+1];
  logic        v_w   [DIM][DIM+1];
  logic [15:0] b_w   [DIM+1][DIM];
  logic [31:0] acc_w [DIM+1][DIM];

  for (genvar i = 0; i < DIM; i++) begin : g_row
    assign a_w[i][0] = a_skew[i];
    assign v_w[i][0] = v_skew[i];
    assign b_w[0][i] = b_skew[i];
    assign acc_w[DIM][i] = '0;
    for (genvar j = 0; j < DIM; j++) begin : g_col
      sa_pe u_pe (
        .clk        (clk),
        .rst_n      (rst_n),
        .clear      (clear),
        .drain      (drain),
        .a_valid_in (v_w[i][j]),
        .a_in       (a_w[i][j]),
        .b_in       (b_w[i][j]),
        .acc_below  (acc_w[i+1][j]),
        .a_valid_out(v_w[i][j+1]),
        .a_out      (a_w[i][j+1]),
        .b_out      (b_w[i+1][j]),
        .acc        (acc_w[i][j])
      );
    end
  end

  for (genvar j = 0; j < DIM; j++) begin : g_out
    assign c_row[j] = acc_w[0][j];
  end

  // Work in flight: any valid operand in the skew registers or the mesh.
  always_comb begin
    busy = in_valid;
    for (int i = 0; i < DIM; i++)
      for (int j = 0; j < DIM; j++)
        busy |= v_w[i][j];
  end

endmodule
