// sa_pe -- one processing element of the output-stationary systolic array.
//
// Every cycle the PE registers the FP16 operand arriving from the left (a) and
// from above (b) and passes them on to its right and lower neighbours. When
// the left operand is marked valid it adds a*b to its FP32 accumulator (one
// multiply-accumulate per PE per cycle, the rate behind the paper's tensor
// PFLOPs figures). clear zeroes the accumulator; during drain the accumulator
// loads acc_below so that results shift up the column by one row per pulse.
// The dataflow (output stationary) and the drain scheme are this design's own
// choices; the paper does not give the array's insides.
module sa_pe
  import spad_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        drain,
  input  logic        a_valid_in,
  input  logic [15:0] a_in,
  input  logic [15:0] b_in,
  input  logic [31:0] acc_below,
  output logic        a_valid_out,
  output logic [15:0] a_out,
  output logic [15:0] b_out,
  output logic [31:0] acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid_out <= 1'b0;
      a_out       <= '0;
      b_out       <= '0;
      acc         <= '0;
    end else begin
      a_valid_out <= a_valid_in;
      a_out       <= a_in;
      b_out       <= b_in;
      if (clear)           acc <= '0;
      else if (drain)      acc <= acc_below;
      else if (a_valid_in) acc <= fp16_mac(acc, a_in, b_in);
    end
  end

endmodule
