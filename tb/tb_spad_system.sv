// tb_spad_system -- end to end through a reduced SPAD pair (Prefill Chip: 2
// cores, 4x4 arrays, 2-wide vector units; Decode Chip: 2 cores, 2x2 arrays,
// 1-wide vector units; 32-bit link) with behavioural GDDR7 and HBM3
// memories. The prefill side loads token activations X and two weight
// tiles, computes K = X*Wk and V = X*Wv on two cores at once, gathers them
// in its L2 and ships them to the Decode Chip's L2 over the link (the KV
// hand-over). The decode side combines them with a vector op (K*s + V), runs
// a matmul of its own on operands from HBM, and stores both results to HBM,
// where they are checked. Every mechanism (matmuls on both chips, vector op,
// L1/L2 and memory transfers, KV flits, link backpressure, crossbar and
// memory stalls, a command held off by a busy lane) is counted and must
// occur at least once.
module tb_spad_system;
  import spad_pkg::*;
  import tb_pkg::*;
  localparam int PD = 4, PVW = 2, DD = 2, DVW = 1, K = 5, K2 = 3, LB = 32;
  localparam int PWB = PD * 16, DWB = DD * 16;

  logic clk = 0, rst_n = 0;
  logic p_cmd_valid = 0, p_cmd_ready, p_busy, d_cmd_valid = 0, d_cmd_ready, d_busy;
  cmd_t p_cmd, d_cmd;
  logic p_mem_req_valid, p_mem_req_we, p_mem_req_ready, p_mem_rsp_valid;
  logic [31:0] p_mem_req_addr;
  logic [PWB-1:0] p_mem_req_wdata, p_mem_rsp_data;
  logic d_mem_req_valid, d_mem_req_we, d_mem_req_ready, d_mem_rsp_valid;
  logic [31:0] d_mem_req_addr;
  logic [DWB-1:0] d_mem_req_wdata, d_mem_rsp_data;
  logic p_link_rx_valid = 0, p_link_rx_ready;
  logic [31:0] p_link_rx_addr = '0;
  logic [LB-1:0] p_link_rx_data = '0;
  logic d_link_tx_valid, d_link_tx_ready = 1;
  logic [31:0] d_link_tx_addr;
  logic [LB-1:0] d_link_tx_data;
  logic kv_flit;
  int checks = 0, failures = 0;

  spad_system #(
    .P_NCORES(2), .P_DIM(PD), .P_VW(PVW), .P_L1_BYTES(1024), .P_L2_BYTES(2048),
    .D_NCORES(2), .D_DIM(DD), .D_VW(DVW), .D_L1_BYTES(512), .D_L2_BYTES(1024),
    .NBANKS(4), .LB(LB)) dut (.*);

  dram_model #(.WB(PWB), .DEPTH(256), .LAT(8)) u_gddr (
    .clk, .req_valid(p_mem_req_valid), .req_we(p_mem_req_we), .req_addr(p_mem_req_addr),
    .req_wdata(p_mem_req_wdata), .req_ready(p_mem_req_ready), .rsp_valid(p_mem_rsp_valid),
    .rsp_data(p_mem_rsp_data));
  dram_model #(.WB(DWB), .DEPTH(256), .LAT(4)) u_hbm (
    .clk, .req_valid(d_mem_req_valid), .req_we(d_mem_req_we), .req_addr(d_mem_req_addr),
    .req_wdata(d_mem_req_wdata), .req_ready(d_mem_req_ready), .rsp_valid(d_mem_rsp_valid),
    .rsp_data(d_mem_rsp_data));

  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_p_matmul = 0, n_d_matmul = 0, n_vec = 0, n_l2_load = 0, n_l2_store = 0;
  int n_mem_load = 0, n_mem_store = 0, n_kv_flits = 0, n_link_bp = 0, n_xbar_stall = 0;
  int n_mem_stall = 0, n_cmd_held = 0;

  always @(posedge clk) if (rst_n) begin
    if (p_cmd_valid && p_cmd_ready) begin
      if (p_cmd.op == OP_MATMUL)   n_p_matmul++;
      if (p_cmd.op == OP_VEC)      n_vec++;
      if (p_cmd.op == OP_L2_LOAD)  n_l2_load++;
      if (p_cmd.op == OP_L2_STORE) n_l2_store++;
      if (p_cmd.op == OP_MEM_LOAD) n_mem_load++;
      if (p_cmd.op == OP_MEM_STORE) n_mem_store++;
    end
    if (d_cmd_valid && d_cmd_ready) begin
      if (d_cmd.op == OP_MATMUL)   n_d_matmul++;
      if (d_cmd.op == OP_VEC)      n_vec++;
      if (d_cmd.op == OP_L2_LOAD)  n_l2_load++;
      if (d_cmd.op == OP_L2_STORE) n_l2_store++;
      if (d_cmd.op == OP_MEM_LOAD) n_mem_load++;
      if (d_cmd.op == OP_MEM_STORE) n_mem_store++;
    end
    if (p_cmd_valid && !p_cmd_ready) n_cmd_held++;
    if (kv_flit) n_kv_flits++;
    if (dut.kv_valid && !dut.kv_ready) n_link_bp++;
    n_xbar_stall += $countones(dut.u_prefill.req_valid & ~dut.u_prefill.req_ready);
    n_xbar_stall += $countones(dut.u_decode.req_valid & ~dut.u_decode.req_ready);
    if ((p_mem_req_valid && !p_mem_req_ready) || (d_mem_req_valid && !d_mem_req_ready)) n_mem_stall++;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic psend(input op_e op, input int core, input int lane_i, input int a0, input int a1,
                       input int a2, input int len);
    @(negedge clk);
    p_cmd = '0; p_cmd.op = op; p_cmd.core = 16'(core); p_cmd.lane = 8'(lane_i);
    p_cmd.addr0 = a0; p_cmd.addr1 = a1; p_cmd.addr2 = a2; p_cmd.len = len; p_cmd_valid = 1;
    @(posedge clk);
    while (!p_cmd_ready) @(posedge clk);
    @(negedge clk) p_cmd_valid = 0;
  endtask

  task automatic dsend(input op_e op, input int core, input int lane_i, input int a0, input int a1,
                       input int a2, input int len, input vop_e v = VOP_ADD, input logic [31:0] sc = '0);
    @(negedge clk);
    d_cmd = '0; d_cmd.op = op; d_cmd.core = 16'(core); d_cmd.lane = 8'(lane_i); d_cmd.vop = v;
    d_cmd.addr0 = a0; d_cmd.addr1 = a1; d_cmd.addr2 = a2; d_cmd.len = len; d_cmd.scalar = sc;
    d_cmd_valid = 1;
    @(posedge clk);
    while (!d_cmd_ready) @(posedge clk);
    @(negedge clk) d_cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (p_busy || d_busy) @(negedge clk);
  endtask

  logic [15:0] X [PD][K];
  logic [15:0] Wk [K][PD];
  logic [15:0] Wv [K][PD];
  logic [15:0] A2 [DD][K2];
  logic [15:0] B2 [K2][DD];

  initial begin
    logic [PWB-1:0] w;
    logic [DWB-1:0] v;
    logic [31:0] s;
    real kr[PD][PD], ks[PD][PD], vr[PD][PD], vs[PD][PD];
    p_cmd = '0;
    d_cmd = '0;
    for (int i = 0; i < 256; i++) begin
      u_gddr.mem[i] = '0;
      u_hbm.mem[i] = '0;
    end
    for (int i = 0; i < PD; i++) for (int k = 0; k < K; k++) X[i][k] = rand_fp16();
    for (int k = 0; k < K; k++) for (int j = 0; j < PD; j++) begin
      Wk[k][j] = rand_fp16();
      Wv[k][j] = rand_fp16();
    end
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < PD; i++) w[16*i +: 16] = X[i][k];
      u_gddr.mem[k] = w;
      for (int j = 0; j < PD; j++) w[16*j +: 16] = Wk[k][j];
      u_gddr.mem[8 + k] = w;
      for (int j = 0; j < PD; j++) w[16*j +: 16] = Wv[k][j];
      u_gddr.mem[16 + k] = w;
    end
    for (int i = 0; i < DD; i++) for (int k = 0; k < K2; k++) A2[i][k] = rand_fp16();
    for (int k = 0; k < K2; k++) for (int j = 0; j < DD; j++) B2[k][j] = rand_fp16();
    for (int k = 0; k < K2; k++) begin
      for (int i = 0; i < DD; i++) v[16*i +: 16] = A2[i][k];
      u_hbm.mem[k] = v;
      for (int j = 0; j < DD; j++) v[16*j +: 16] = B2[k][j];
      u_hbm.mem[8 + k] = v;
    end
    s = rand_fp32();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------- prefill ----------
    psend(OP_MEM_LOAD, 0, 0, 0, 0, 0, 24);           // GDDR 0..23 -> L2 0..23
    dsend(OP_MEM_LOAD, 0, 0, 0, 0, 101, 16);         // decode, meanwhile: HBM 0..15 -> L2 101..
    wait_idle();
    psend(OP_L2_LOAD, 0, 0, 0, 0, 0, 24);
    psend(OP_L2_LOAD, 1, 0, 0, 0, 0, 24);
    wait_idle();
    psend(OP_MATMUL, 0, 0, 0, 8, 32, K);             // K = X*Wk on core 0
    psend(OP_MATMUL, 1, 1, 0, 16, 32, K);            // V = X*Wv on core 1
    psend(OP_MATMUL, 0, 0, 0, 8, 32, K);             // repeat on busy lane 0: held off
    wait_idle();
    psend(OP_L2_STORE, 0, 0, 32, 0, 64, 2 * PD);     // K -> L2 64..71
    psend(OP_L2_STORE, 1, 0, 32, 0, 72, 2 * PD);     // V -> L2 72..79
    wait_idle();
    psend(OP_IC_SEND, 0, 0, 64, 0, 0, 4 * PD);       // K,V -> decode L2 byte 0 (words 0..31)
    wait_idle();

    // ---------- decode ----------
    dsend(OP_L2_LOAD, 0, 0, 0, 0, 0, 32);            // K,V -> L1 0..31 of decode core 0
    dsend(OP_L2_LOAD, 1, 0, 101, 0, 0, 16);          // A2,B2 -> L1 0..15 of decode core 1 (same banks as core 0)
    wait_idle();
    dsend(OP_VEC, 0, 0, 0, 16, 64, 16, VOP_FMA, s);  // Y = K*s + V
    dsend(OP_MATMUL, 1, 2, 0, 8, 32, K2);            // C2 = A2*B2
    wait_idle();
    dsend(OP_L2_STORE, 0, 0, 64, 0, 200, 16);
    dsend(OP_L2_STORE, 1, 0, 32, 0, 220, 2 * DD);
    wait_idle();
    dsend(OP_MEM_STORE, 0, 0, 200, 0, 128, 16);
    wait_idle();
    dsend(OP_MEM_STORE, 0, 0, 220, 0, 160, 2 * DD);
    wait_idle();

    // ---------- check ----------
    for (int i = 0; i < PD; i++) for (int j = 0; j < PD; j++) begin
      kr[i][j] = 0.0; ks[i][j] = 0.0; vr[i][j] = 0.0; vs[i][j] = 0.0;
      for (int k = 0; k < K; k++) begin
        kr[i][j] += fp16_to_real(X[i][k]) * fp16_to_real(Wk[k][j]);
        ks[i][j] += absr(fp16_to_real(X[i][k]) * fp16_to_real(Wk[k][j]));
        vr[i][j] += fp16_to_real(X[i][k]) * fp16_to_real(Wv[k][j]);
        vs[i][j] += absr(fp16_to_real(X[i][k]) * fp16_to_real(Wv[k][j]));
      end
      // element (i,j) of K is fp32 number i*PD+j of the K block, one per decode word
      checks++;
      if (!close(u_hbm.mem[128 + i * PD + j], kr[i][j] * fp32_to_real(s) + vr[i][j],
                 ks[i][j] * absr(fp32_to_real(s)) + vs[i][j])) begin
        failures++;
        $display("FAIL: Y[%0d][%0d] = %f, expected %f", i, j, fp32_to_real(u_hbm.mem[128 + i * PD + j]),
                 kr[i][j] * fp32_to_real(s) + vr[i][j]);
      end
    end
    for (int i = 0; i < DD; i++) for (int j = 0; j < DD; j++) begin
      real r2, s2;
      r2 = 0.0; s2 = 0.0;
      for (int k = 0; k < K2; k++) begin
        r2 += fp16_to_real(A2[i][k]) * fp16_to_real(B2[k][j]);
        s2 += absr(fp16_to_real(A2[i][k]) * fp16_to_real(B2[k][j]));
      end
      checks++;
      if (!close(u_hbm.mem[160 + 2 * i + j], r2, s2)) begin
        failures++;
        $display("FAIL: C2[%0d][%0d] = %f, expected %f", i, j, fp32_to_real(u_hbm.mem[160 + 2 * i + j]), r2);
      end
    end
    $display("mechanisms: prefill matmul %0d, decode matmul %0d, vector %0d, L2->L1 %0d, L1->L2 %0d,",
             n_p_matmul, n_d_matmul, n_vec, n_l2_load, n_l2_store);
    $display("  mem load %0d, mem store %0d, KV flits %0d, link backpressure %0d, crossbar stalls %0d,",
             n_mem_load, n_mem_store, n_kv_flits, n_link_bp, n_xbar_stall);
    $display("  memory stalls %0d, held commands %0d", n_mem_stall, n_cmd_held);
    checks += 13;
    if (n_p_matmul == 0)   begin failures++; $display("FAIL: no prefill matmul"); end
    if (n_d_matmul == 0)   begin failures++; $display("FAIL: no decode matmul"); end
    if (n_vec == 0)        begin failures++; $display("FAIL: no vector op"); end
    if (n_l2_load == 0)    begin failures++; $display("FAIL: no L2->L1 transfer"); end
    if (n_l2_store == 0)   begin failures++; $display("FAIL: no L1->L2 transfer"); end
    if (n_mem_load == 0)   begin failures++; $display("FAIL: no memory load"); end
    if (n_mem_store == 0)  begin failures++; $display("FAIL: no memory store"); end
    if (n_kv_flits != 2 * 4 * PD) begin failures++; $display("FAIL: %0d KV flits, expected %0d", n_kv_flits, 8 * PD); end
    if (n_link_bp == 0)    begin failures++; $display("FAIL: no link backpressure"); end
    if (n_xbar_stall == 0) begin failures++; $display("FAIL: no crossbar stall"); end
    if (n_mem_stall == 0)  begin failures++; $display("FAIL: no memory stall"); end
    if (n_cmd_held == 0)   begin failures++; $display("FAIL: no held command"); end
    if (n_vec + n_p_matmul + n_d_matmul < 4) begin failures++; $display("FAIL: too few compute commands"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
