// tb_lane -- one lane (4x4 array, 2-wide vector unit) attached to a small
// L1. Loads A and B into the L1 through the testbench port, runs a matmul
// and then a vector FMA on the matmul result, checks every result word and
// the cycle counts K + 4*DIM + 2 (matmul) and len + 3 (vector op).
module tb_lane;
  import spad_pkg::*;
  import tb_pkg::*;
  localparam int DIM = 4, VW = 2, K = 5;
  localparam int L1_BYTES = 1024, WB = DIM * 16, AW = 7;
  localparam int A_AT = 0, B_AT = 16, C_AT = 32, Y_AT = 64, BIAS_AT = 96;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic [2:0] rd_en;
  logic [2:0][AW-1:0] rd_addr;
  logic [2:0][WB-1:0] rd_data;
  logic [1:0] wr_en;
  logic [1:0][AW-1:0] wr_addr;
  logic [1:0][WB-1:0] wr_data;
  int checks = 0, failures = 0;

  l1_cache #(.L1_BYTES(L1_BYTES), .WB(WB), .NRD(3), .NWR(2)) u_l1 (.*);

  lane #(.DIM(DIM), .VW(VW), .AW(AW)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .busy,
    .rd0_en(rd_en[0]), .rd0_addr(rd_addr[0]), .rd0_data(rd_data[0]),
    .rd1_en(rd_en[1]), .rd1_addr(rd_addr[1]), .rd1_data(rd_data[1]),
    .wr_en(wr_en[0]), .wr_addr(wr_addr[0]), .wr_data(wr_data[0]));

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] A [DIM][K];
  logic [15:0] B [K][DIM];
  real Cr [DIM][DIM];
  real Cs [DIM][DIM];

  task automatic poke(input int addr, input logic [WB-1:0] d);
    @(negedge clk);
    wr_en[1] = 1; wr_addr[1] = AW'(addr); wr_data[1] = d;
    @(negedge clk);
    wr_en[1] = 0;
  endtask

  task automatic peek(input int addr, output logic [WB-1:0] d);
    @(negedge clk);
    rd_en[2] = 1; rd_addr[2] = AW'(addr);
    @(negedge clk);
    rd_en[2] = 0;
    d = rd_data[2];
  endtask

  task automatic issue(input cmd_t c, output int cycles);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (busy && cycles < 1000) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  initial begin
    cmd_t c;
    int cyc;
    logic [WB-1:0] w;
    logic [31:0] s;
    logic [VW-1:0][31:0] bias [2*DIM];
    rd_en[2] = 0; wr_en[1] = 0; rd_addr[2] = '0; wr_addr[1] = '0; wr_data[1] = '0;
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DIM; i++) for (int k = 0; k < K; k++) A[i][k] = rand_fp16();
    for (int k = 0; k < K; k++) for (int j = 0; j < DIM; j++) B[k][j] = rand_fp16();
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < DIM; i++) w[16*i +: 16] = A[i][k];
      poke(A_AT + k, w);
      for (int j = 0; j < DIM; j++) w[16*j +: 16] = B[k][j];
      poke(B_AT + k, w);
    end
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) begin
      Cr[i][j] = 0.0; Cs[i][j] = 0.0;
      for (int k = 0; k < K; k++) begin
        Cr[i][j] += fp16_to_real(A[i][k]) * fp16_to_real(B[k][j]);
        Cs[i][j] += absr(fp16_to_real(A[i][k]) * fp16_to_real(B[k][j]));
      end
    end
    // matmul
    c = '0; c.op = OP_MATMUL; c.addr0 = A_AT; c.addr1 = B_AT; c.addr2 = C_AT; c.len = K;
    issue(c, cyc);
    checks++;
    if (cyc != K + 4 * DIM + 2) begin
      failures++;
      $display("FAIL: matmul took %0d cycles, expected %0d", cyc, K + 4 * DIM + 2);
    end
    for (int i = 0; i < DIM; i++) for (int h = 0; h < 2; h++) begin
      peek(C_AT + 2 * i + h, w);
      for (int e = 0; e < VW; e++) begin
        checks++;
        if (!close(w[32*e +: 32], Cr[i][h*VW+e], Cs[i][h*VW+e])) begin
          failures++;
          $display("FAIL: C[%0d][%0d] got %f expected %f", i, h*VW+e, fp32_to_real(w[32*e +: 32]), Cr[i][h*VW+e]);
        end
      end
    end
    // vector FMA: Y = C * s + bias over the 2*DIM result words
    s = rand_fp32();
    for (int t = 0; t < 2 * DIM; t++) begin
      for (int e = 0; e < VW; e++) bias[t][e] = rand_fp32();
      poke(BIAS_AT + t, bias[t]);
    end
    c = '0; c.op = OP_VEC; c.vop = VOP_FMA; c.addr0 = C_AT; c.addr1 = BIAS_AT; c.addr2 = Y_AT;
    c.len = 2 * DIM; c.scalar = s;
    issue(c, cyc);
    checks++;
    if (cyc != 2 * DIM + 3) begin
      failures++;
      $display("FAIL: vector op took %0d cycles, expected %0d", cyc, 2 * DIM + 3);
    end
    for (int t = 0; t < 2 * DIM; t++) begin
      peek(Y_AT + t, w);
      for (int e = 0; e < VW; e++) begin
        real cv, ex;
        cv = Cr[t/2][(t%2)*VW+e];
        ex = cv * fp32_to_real(s) + fp32_to_real(bias[t][e]);
        checks++;
        if (!close(w[32*e +: 32], ex, Cs[t/2][(t%2)*VW+e] * absr(fp32_to_real(s)) + absr(fp32_to_real(bias[t][e])))) begin
          failures++;
          $display("FAIL: Y word %0d elem %0d got %f expected %f", t, e, fp32_to_real(w[32*e +: 32]), ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
