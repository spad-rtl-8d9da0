// tb_vector_unit -- drives one random vector per cycle through every
// operation of a 4-wide vector unit and checks each result (within FP32
// rounding of a double reference) and the one-cycle latency.
module tb_vector_unit;
  import spad_pkg::*;
  import tb_pkg::*;
  localparam int VW = 4;
  localparam int N  = 40;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vop_e op;
  logic [31:0] scalar;
  logic [VW-1:0][31:0] a, b, y;
  int checks = 0, failures = 0;

  vector_unit #(.VW(VW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real expect_of(vop_e o, logic [31:0] x, logic [31:0] z, logic [31:0] s);
    real rx, rz, rs;
    rx = fp32_to_real(x);
    rz = fp32_to_real(z);
    rs = fp32_to_real(s);
    case (o)
      VOP_ADD: return rx + rz;
      VOP_MUL: return rx * rz;
      VOP_MAX: return (rx > rz) ? rx : rz;
      default: return rx * rs + rz;
    endcase
  endfunction

  function automatic real scale_of(vop_e o, logic [31:0] x, logic [31:0] z, logic [31:0] s);
    real rx, rz, rs;
    rx = absr(fp32_to_real(x));
    rz = absr(fp32_to_real(z));
    rs = absr(fp32_to_real(s));
    case (o)
      VOP_ADD: return rx + rz;
      VOP_MUL: return rx * rz;
      VOP_MAX: return 0.0;
      default: return rx * rs + rz;
    endcase
  endfunction

  initial begin
    vop_e        o_q;
    logic [VW-1:0][31:0] a_q, b_q;
    logic [31:0] s_q;
    a = '0;
    b = '0;
    op = VOP_ADD;
    scalar = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < N; t++) begin
      in_valid = 1;
      op = vop_e'(t % 4);
      scalar = rand_fp32();
      for (int i = 0; i < VW; i++) begin
        a[i] = rand_fp32();
        b[i] = rand_fp32();
      end
      a_q = a; b_q = b; o_q = op; s_q = scalar;
      @(negedge clk);
      in_valid = (t + 1 < N);
      checks++;
      if (!out_valid) begin
        failures++;
        $display("FAIL: out_valid not one cycle after in_valid (t=%0d)", t);
      end
      for (int i = 0; i < VW; i++) begin
        checks++;
        if (!close(y[i], expect_of(o_q, a_q[i], b_q[i], s_q), scale_of(o_q, a_q[i], b_q[i], s_q))) begin
          failures++;
          $display("FAIL: op %0d elem %0d got %f expected %f", o_q, i, fp32_to_real(y[i]),
                   expect_of(o_q, a_q[i], b_q[i], s_q));
        end
      end
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (out_valid) begin
      failures++;
      $display("FAIL: out_valid stuck high");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
