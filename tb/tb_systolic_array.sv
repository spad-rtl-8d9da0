// tb_systolic_array -- checks C = A x B on a 4x4 array against a double
// precision reference, for two back-to-back products (the second after a
// clear), and checks the timing: one operand column per cycle and busy
// falling exactly 2*(DIM-1) cycles after the last operand.
module tb_systolic_array;
  import tb_pkg::*;
  localparam int DIM = 4;
  localparam int K   = 7;

  logic clk = 0, rst_n = 0, clear = 0, drain = 0, in_valid = 0;
  logic [DIM-1:0][15:0] a_col, b_row;
  logic [DIM-1:0][31:0] c_row;
  logic busy;
  int checks = 0, failures = 0;

  systolic_array #(.DIM(DIM)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] A [DIM][K];
  logic [15:0] B [K][DIM];

  task automatic run_one();
    real ref_v, scale;
    int  cyc;
    for (int i = 0; i < DIM; i++) for (int k = 0; k < K; k++) A[i][k] = rand_fp16();
    for (int k = 0; k < K; k++) for (int j = 0; j < DIM; j++) B[k][j] = rand_fp16();
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int k = 0; k < K; k++) begin
      in_valid = 1;
      for (int i = 0; i < DIM; i++) a_col[i] = A[i][k];
      for (int j = 0; j < DIM; j++) b_row[j] = B[k][j];
      @(negedge clk);
    end
    in_valid = 0;
    a_col = '0;
    b_row = '0;
    // busy must stay high for 2*(DIM-1) cycles after the last operand, then fall
    cyc = 0;
    while (busy && cyc < 100) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 2 * (DIM - 1)) begin
      failures++;
      $display("FAIL: busy fell %0d cycles after last operand, expected %0d", cyc, 2 * (DIM - 1));
    end
    // drain rows 0..DIM-1
    for (int i = 0; i < DIM; i++) begin
      for (int j = 0; j < DIM; j++) begin
        ref_v = 0.0;
        scale = 0.0;
        for (int k = 0; k < K; k++) begin
          ref_v += fp16_to_real(A[i][k]) * fp16_to_real(B[k][j]);
          scale += absr(fp16_to_real(A[i][k]) * fp16_to_real(B[k][j]));
        end
        checks++;
        if (!close(c_row[j], ref_v, scale)) begin
          failures++;
          $display("FAIL: C[%0d][%0d] = %f, expected %f", i, j, fp32_to_real(c_row[j]), ref_v);
        end
      end
      drain = 1;
      @(negedge clk);
      drain = 0;
    end
  endtask

  initial begin
    a_col = '0;
    b_row = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_one();
    run_one();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
