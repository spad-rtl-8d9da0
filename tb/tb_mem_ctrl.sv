// tb_mem_ctrl -- the memory controller between a behavioural device memory
// (random acceptance, 6-cycle read latency) and a behavioural L2 port
// (random grant). Copies a block from device memory into L2, then a
// different L2 block back to device memory, and checks both copies word by
// word and that the second copy stops at its length.
module tb_mem_ctrl;
  import spad_pkg::*;
  localparam int WB = 64, N = 20;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic l2_req_valid, l2_req_we, l2_req_ready, l2_rsp_valid;
  logic [31:0] l2_req_addr;
  logic [WB-1:0] l2_req_wdata, l2_rsp_data;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [WB-1:0] mem_req_wdata, mem_rsp_data;
  logic [WB-1:0] l2 [128];
  logic grant_en;
  int checks = 0, failures = 0;

  mem_ctrl #(.WB(WB)) dut (.*);
  dram_model #(.WB(WB), .DEPTH(128), .LAT(6)) u_dram (
    .clk, .req_valid(mem_req_valid), .req_we(mem_req_we), .req_addr(mem_req_addr),
    .req_wdata(mem_req_wdata), .req_ready(mem_req_ready), .rsp_valid(mem_rsp_valid),
    .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;
  assign l2_req_ready = l2_req_valid && grant_en;
  always @(posedge clk) begin
    grant_en <= 1'($urandom);
    l2_rsp_valid <= 1'b0;
    if (l2_req_valid && l2_req_ready) begin
      if (l2_req_we) l2[l2_req_addr] <= l2_req_wdata;
      else begin
        l2_rsp_valid <= 1'b1;
        l2_rsp_data <= l2[l2_req_addr];
      end
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input op_e op, input int src, input int dst, input int len);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.addr0 = src; cmd.addr2 = dst; cmd.len = len; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk) cmd_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    grant_en = 0;
    cmd = '0;
    for (int i = 0; i < 128; i++) begin
      u_dram.mem[i] = {$urandom, $urandom};
      l2[i] = {$urandom, $urandom};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(OP_MEM_LOAD, 10, 40, N);     // DRAM 10.. -> L2 40..
    for (int i = 0; i < 128; i++) begin
      if (i >= 40 && i < 40 + N) begin
        checks++;
        if (l2[i] !== u_dram.mem[i - 30]) begin failures++; $display("FAIL: L2[%0d]", i); end
      end
    end
    run(OP_MEM_STORE, 70, 90, N);    // L2 70.. -> DRAM 90..
    for (int i = 90; i < 90 + N; i++) begin
      checks++;
      if (u_dram.mem[i] !== l2[i - 20]) begin failures++; $display("FAIL: DRAM[%0d]", i); end
    end
    checks++;
    if (u_dram.mem[90 + N] === l2[70 + N]) begin failures++; $display("FAIL: wrote past the end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
