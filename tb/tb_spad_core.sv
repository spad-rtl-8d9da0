// tb_spad_core -- a core with four lanes (4x4 arrays, 2-wide vector units)
// and a small L1, attached to a behavioural L2 port that grants requests at
// random. Loads A and B from L2 into L1, runs two matmuls (A x B and A x B2)
// on lanes 0 and 1 at the same time, adds the two results on lane 2, stores
// everything back to L2 and checks it there. Also checks that the lanes
// overlap and that a command for a busy lane is held off.
module tb_spad_core;
  import spad_pkg::*;
  import tb_pkg::*;
  localparam int DIM = 4, VW = 2, K = 4, L1_BYTES = 1024, WB = 64, L2W = 256;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic l2_req_valid, l2_req_we, l2_req_ready, l2_rsp_valid;
  logic [31:0] l2_req_addr;
  logic [WB-1:0] l2_req_wdata, l2_rsp_data;
  logic [WB-1:0] l2 [L2W];
  int checks = 0, failures = 0, overlap = 0, held = 0;

  spad_core #(.DIM(DIM), .VW(VW), .L1_BYTES(L1_BYTES)) dut (.*);
  always #5 clk = ~clk;

  // behavioural L2 port: random grant, read data one cycle after the grant
  always_comb l2_req_ready = l2_req_valid && grant_en;
  logic grant_en;
  always @(posedge clk) begin
    grant_en <= 1'($urandom);
    l2_rsp_valid <= 1'b0;
    if (l2_req_valid && l2_req_ready) begin
      if (l2_req_we) l2[l2_req_addr] <= l2_req_wdata;
      else begin
        l2_rsp_valid <= 1'b1;
        l2_rsp_data  <= l2[l2_req_addr];
      end
    end
  end

  always @(posedge clk) if (dut.lane_busy[0] && dut.lane_busy[1]) overlap++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) begin
      held++;
      @(posedge clk);
    end
    @(negedge clk) cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  function automatic cmd_t mk(op_e op, int lane_i, int a0, int a1, int a2, int len, vop_e v = VOP_ADD);
    cmd_t c;
    c = '0; c.op = op; c.lane = 8'(lane_i); c.addr0 = a0; c.addr1 = a1; c.addr2 = a2; c.len = len; c.vop = v;
    return c;
  endfunction

  logic [15:0] A [DIM][K];
  logic [15:0] B [2][K][DIM];

  initial begin
    logic [WB-1:0] w;
    real r0, s0, r1, s1;
    cmd = '0;
    grant_en = 0;
    for (int i = 0; i < L2W; i++) l2[i] = '0;
    for (int i = 0; i < DIM; i++) for (int k = 0; k < K; k++) A[i][k] = rand_fp16();
    for (int m = 0; m < 2; m++) for (int k = 0; k < K; k++) for (int j = 0; j < DIM; j++) B[m][k][j] = rand_fp16();
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < DIM; i++) w[16*i +: 16] = A[i][k];
      l2[k] = w;
      for (int m = 0; m < 2; m++) begin
        for (int j = 0; j < DIM; j++) w[16*j +: 16] = B[m][k][j];
        l2[16 + 16 * m + k] = w;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(mk(OP_L2_LOAD, 0, 0, 0, 0, K));          // A  -> L1 0
    send(mk(OP_L2_LOAD, 0, 16, 0, 16, 2 * 16));   // B, B2 -> L1 16, 32
    wait_idle();
    send(mk(OP_MATMUL, 0, 0, 16, 64, K));
    send(mk(OP_MATMUL, 1, 0, 32, 80, K));
    send(mk(OP_MATMUL, 0, 0, 16, 64, K));         // lane 0 busy: must be held, then rerun
    wait_idle();
    send(mk(OP_VEC, 2, 64, 80, 96, 2 * DIM, VOP_ADD));
    wait_idle();
    send(mk(OP_L2_STORE, 0, 64, 0, 128, 48));      // L1 64..111 -> L2 128..175
    wait_idle();
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) begin
      logic [31:0] g0, g1, gy;
      r0 = 0.0; s0 = 0.0; r1 = 0.0; s1 = 0.0;
      for (int k = 0; k < K; k++) begin
        r0 += fp16_to_real(A[i][k]) * fp16_to_real(B[0][k][j]);
        s0 += absr(fp16_to_real(A[i][k]) * fp16_to_real(B[0][k][j]));
        r1 += fp16_to_real(A[i][k]) * fp16_to_real(B[1][k][j]);
        s1 += absr(fp16_to_real(A[i][k]) * fp16_to_real(B[1][k][j]));
      end
      g0 = l2[128 + 2 * i + j / VW][32 * (j % VW) +: 32];
      g1 = l2[144 + 2 * i + j / VW][32 * (j % VW) +: 32];
      gy = l2[160 + 2 * i + j / VW][32 * (j % VW) +: 32];
      checks += 3;
      if (!close(g0, r0, s0)) begin failures++; $display("FAIL: C0[%0d][%0d] %f vs %f", i, j, fp32_to_real(g0), r0); end
      if (!close(g1, r1, s1)) begin failures++; $display("FAIL: C1[%0d][%0d] %f vs %f", i, j, fp32_to_real(g1), r1); end
      if (!close(gy, r0 + r1, s0 + s1)) begin failures++; $display("FAIL: Y[%0d][%0d] %f vs %f", i, j, fp32_to_real(gy), r0 + r1); end
    end
    checks += 2;
    if (overlap == 0) begin failures++; $display("FAIL: lanes 0 and 1 never ran together"); end
    if (held == 0)    begin failures++; $display("FAIL: command to a busy lane was not held off"); end
    $display("lane overlap cycles %0d, held command cycles %0d", overlap, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
