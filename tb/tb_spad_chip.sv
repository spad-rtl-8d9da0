// tb_spad_chip -- a reduced chip (2 cores, 4x4 arrays, 2-wide vector units,
// 1 KB L1, 2 KB L2 in 4 banks) with a behavioural device memory and its link
// looped back to itself. One host program runs the whole data path:
// device memory -> L2 -> both cores' L1s, a matmul on each core, a vector add
// on core 1, both results back to L2 at the same time, one of them copied
// through the link to another L2 address, and both stored to device memory,
// where they are checked against a double-precision reference.
module tb_spad_chip;
  import spad_pkg::*;
  import tb_pkg::*;
  localparam int NCORES = 2, DIM = 4, VW = 2, K = 6, WB = 64, LB = 32;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [WB-1:0] mem_req_wdata, mem_rsp_data;
  logic link_tx_valid, link_tx_ready, link_rx_valid, link_rx_ready;
  logic [31:0] link_tx_addr, link_rx_addr;
  logic [LB-1:0] link_tx_data, link_rx_data;
  int checks = 0, failures = 0, xbar_stalls = 0;

  spad_chip #(.NCORES(NCORES), .DIM(DIM), .VW(VW), .L1_BYTES(1024), .L2_BYTES(2048),
              .NBANKS(4), .LB(LB)) dut (.*);
  dram_model #(.WB(WB), .DEPTH(256), .LAT(5)) u_dram (
    .clk, .req_valid(mem_req_valid), .req_we(mem_req_we), .req_addr(mem_req_addr),
    .req_wdata(mem_req_wdata), .req_ready(mem_req_ready), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data));

  assign link_rx_valid = link_tx_valid;
  assign link_tx_ready = link_rx_ready;
  assign link_rx_addr  = link_tx_addr;
  assign link_rx_data  = link_tx_data;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) xbar_stalls += $countones(dut.req_valid & ~dut.req_ready);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input op_e op, input int core, input int lane_i, input int a0, input int a1,
                      input int a2, input int len, input vop_e v = VOP_ADD);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.core = 16'(core); cmd.lane = 8'(lane_i); cmd.addr0 = a0;
    cmd.addr1 = a1; cmd.addr2 = a2; cmd.len = len; cmd.vop = v; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk) cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  logic [15:0] A [DIM][K];
  logic [15:0] B [K][DIM];

  initial begin
    logic [WB-1:0] w;
    real r, s;
    cmd = '0;
    for (int i = 0; i < 256; i++) u_dram.mem[i] = '0;
    for (int i = 0; i < DIM; i++) for (int k = 0; k < K; k++) A[i][k] = rand_fp16();
    for (int k = 0; k < K; k++) for (int j = 0; j < DIM; j++) B[k][j] = rand_fp16();
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < DIM; i++) w[16*i +: 16] = A[i][k];
      u_dram.mem[k] = w;
      for (int j = 0; j < DIM; j++) w[16*j +: 16] = B[k][j];
      u_dram.mem[16 + k] = w;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(OP_MEM_LOAD, 0, 0, 0, 0, 0, 32);          // DRAM 0..31 -> L2 0..31
    wait_idle();
    send(OP_L2_LOAD, 0, 0, 0, 0, 0, 32);            // both cores: L2 0..31 -> L1 0..31
    send(OP_L2_LOAD, 1, 0, 0, 0, 0, 32);
    wait_idle();
    send(OP_MATMUL, 0, 0, 0, 16, 64, K);            // core 0: C at L1 64
    send(OP_MATMUL, 1, 3, 0, 16, 64, K);            // core 1 lane 3: C at L1 64
    wait_idle();
    send(OP_VEC, 1, 2, 64, 64, 80, 2 * DIM, VOP_ADD);  // core 1: 2C at L1 80
    wait_idle();
    send(OP_L2_STORE, 0, 0, 64, 0, 64, 2 * DIM);    // C  -> L2 64
    send(OP_L2_STORE, 1, 0, 80, 0, 81, 2 * DIM);    // 2C -> L2 81 (same banks as core 0, one word behind)
    wait_idle();
    send(OP_IC_SEND, 0, 0, 64, 0, 100 * (WB / 8), 2 * DIM);  // L2 64 -> L2 100 over the link
    wait_idle();
    send(OP_MEM_STORE, 0, 0, 81, 0, 128, 2 * DIM);   // 2C -> DRAM 128
    wait_idle();
    send(OP_MEM_STORE, 0, 0, 100, 0, 144, 2 * DIM);  // C (via link) -> DRAM 144
    wait_idle();
    for (int i = 0; i < DIM; i++) for (int j = 0; j < DIM; j++) begin
      logic [31:0] g1, g2;
      r = 0.0; s = 0.0;
      for (int k = 0; k < K; k++) begin
        r += fp16_to_real(A[i][k]) * fp16_to_real(B[k][j]);
        s += absr(fp16_to_real(A[i][k]) * fp16_to_real(B[k][j]));
      end
      g2 = u_dram.mem[128 + 2 * i + j / VW][32 * (j % VW) +: 32];
      g1 = u_dram.mem[144 + 2 * i + j / VW][32 * (j % VW) +: 32];
      checks += 2;
      if (!close(g1, r, s))             begin failures++; $display("FAIL: C[%0d][%0d] %f vs %f", i, j, fp32_to_real(g1), r); end
      if (!close(g2, 2.0 * r, 2.0 * s)) begin failures++; $display("FAIL: 2C[%0d][%0d] %f vs %f", i, j, fp32_to_real(g2), 2.0 * r); end
    end
    checks++;
    if (xbar_stalls == 0) begin failures++; $display("FAIL: no crossbar contention"); end
    $display("crossbar stall cycles %0d", xbar_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
