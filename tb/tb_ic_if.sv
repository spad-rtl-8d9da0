// tb_ic_if -- interconnect interface in loopback: its outgoing link feeds its
// own incoming link through a channel that stalls at random, and both of its
// L2 ports reach one behavioural L2. An OP_IC_SEND of N 64-bit words to a
// remote byte address must reproduce the words there, each sent as two
// 32-bit flits with the right byte addresses. Also checks that the receiver
// applied backpressure at least once.
module tb_ic_if;
  import spad_pkg::*;
  localparam int WB = 64, LB = 32, N = 12, SRC = 4, DST = 64;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd;
  logic tx_l2_req_valid, tx_l2_req_ready, tx_l2_rsp_valid;
  logic [31:0] tx_l2_req_addr;
  logic [WB-1:0] tx_l2_rsp_data;
  logic rx_l2_req_valid, rx_l2_req_ready;
  logic [31:0] rx_l2_req_addr;
  logic [WB-1:0] rx_l2_req_wdata;
  logic tx_valid, tx_ready, rx_valid, rx_ready, chan_en;
  logic [31:0] tx_addr, rx_addr;
  logic [LB-1:0] tx_data, rx_data;
  logic [WB-1:0] l2 [128];
  logic grant_en;
  int checks = 0, failures = 0, backpressure = 0, flits = 0;

  ic_if #(.WB(WB), .LB(LB)) dut (.*);
  always #5 clk = ~clk;

  assign rx_valid = tx_valid && chan_en;
  assign tx_ready = rx_ready && chan_en;
  assign rx_addr  = tx_addr;
  assign rx_data  = tx_data;
  assign tx_l2_req_ready = tx_l2_req_valid && grant_en;
  assign rx_l2_req_ready = rx_l2_req_valid && !grant_en;

  always @(posedge clk) begin
    grant_en <= 1'($urandom);
    chan_en <= ($urandom_range(0, 3) != 0);
    tx_l2_rsp_valid <= 1'b0;
    if (tx_l2_req_valid && tx_l2_req_ready) begin
      tx_l2_rsp_valid <= 1'b1;
      tx_l2_rsp_data <= l2[tx_l2_req_addr];
    end
    if (rx_l2_req_valid && rx_l2_req_ready) l2[rx_l2_req_addr] <= rx_l2_req_wdata;
    if (tx_valid && !rx_ready) backpressure++;
    if (tx_valid && tx_ready) begin
      // flit k of word w goes to byte DST*8 + w*8 + k*4
      checks++;
      if (tx_addr != DST * (WB / 8) + flits * (LB / 8)) begin
        failures++;
        $display("FAIL: flit %0d byte address %0d", flits, tx_addr);
      end
      flits++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = '0;
    grant_en = 0;
    chan_en = 0;
    for (int i = 0; i < 128; i++) l2[i] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cmd.op = OP_IC_SEND; cmd.addr0 = SRC; cmd.addr2 = DST * (WB / 8); cmd.len = N; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk) cmd_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (l2[DST + i] !== l2[SRC + i]) begin
        failures++;
        $display("FAIL: word %0d: %h, expected %h", i, l2[DST + i], l2[SRC + i]);
      end
    end
    checks += 2;
    if (flits != 2 * N) begin failures++; $display("FAIL: %0d flits, expected %0d", flits, 2 * N); end
    if (backpressure == 0) begin failures++; $display("FAIL: no backpressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
