// tb_l2_xbar -- four requesters issue random reads and writes to a small
// banked L2 at once. Each port owns every fourth group of NBANKS words, so a reference
// copy per word predicts every read. Checks read data, the one-cycle read
// latency, at most one grant per bank per cycle, that requests to different
// banks are granted in the same cycle, that contention occurs and that every
// port finishes (round-robin: no starvation).
module tb_l2_xbar;
  localparam int NP = 4, WB = 32, L2_BYTES = 256, NBANKS = 4, WORDS = 64, NOPS = 60;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] req_valid, req_we, req_ready, rsp_valid;
  logic [NP-1:0][31:0] req_addr;
  logic [NP-1:0][WB-1:0] req_wdata, rsp_data;
  logic [WB-1:0] refm [WORDS];
  int checks = 0, failures = 0, parallel_grants = 0, stalls = 0;
  int done_ports = 0;

  l2_xbar #(.NP(NP), .L2_BYTES(L2_BYTES), .WB(WB), .NBANKS(NBANKS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, %0d ports finished", done_ports);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    int n;
    logic [NBANKS-1:0] used;
    n = 0;
    used = '0;
    for (int p = 0; p < NP; p++) begin
      if (req_valid[p] && !req_ready[p]) stalls++;
      if (req_valid[p] && req_ready[p]) begin
        n++;
        checks++;
        if (used[req_addr[p] % NBANKS]) begin
          failures++;
          $display("FAIL: two grants to bank %0d in one cycle", req_addr[p] % NBANKS);
        end
        used[req_addr[p] % NBANKS] = 1'b1;
      end
    end
    if (n >= 2) parallel_grants++;
  end

  for (genvar p = 0; p < NP; p++) begin : g_port
    initial begin
      int a;
      logic [WB-1:0] expect_d;
      logic rd;
      req_valid[p] = 0; req_we[p] = 0; req_addr[p] = '0; req_wdata[p] = '0;
      wait (rst_n);
      // initialise own words
      for (int w = 0; w < WORDS; w++) begin
        if ((w / NBANKS) % NP != p) continue;
        @(negedge clk);
        req_valid[p] = 1; req_we[p] = 1; req_addr[p] = w; req_wdata[p] = $urandom;
        refm[w] = req_wdata[p];
        @(posedge clk);
        while (!req_ready[p]) @(posedge clk);
        @(negedge clk) req_valid[p] = 0;
      end
      for (int i = 0; i < NOPS; i++) begin
        a = NBANKS * (p + NP * $urandom_range(0, WORDS / (NBANKS * NP) - 1)) + $urandom_range(0, NBANKS - 1);
        rd = 1'($urandom);
        @(negedge clk);
        req_valid[p] = 1; req_we[p] = !rd; req_addr[p] = a; req_wdata[p] = $urandom;
        if (!rd) refm[a] = req_wdata[p];
        expect_d = refm[a];
        @(posedge clk);
        while (!req_ready[p]) @(posedge clk);
        @(negedge clk);
        req_valid[p] = 0;
        if (rd) begin
          checks++;
          if (!rsp_valid[p] || rsp_data[p] !== expect_d) begin
            failures++;
            $display("FAIL: port %0d read word %0d: valid=%0d data=%h expected %h", p, a,
                     rsp_valid[p], rsp_data[p], expect_d);
          end
        end
      end
      done_ports++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_ports == NP);
    repeat (3) @(negedge clk);
    checks += 2;
    if (parallel_grants == 0) begin
      failures++;
      $display("FAIL: no cycle granted two banks at once");
    end
    if (stalls == 0) begin
      failures++;
      $display("FAIL: no bank contention was exercised");
    end
    $display("parallel-grant cycles %0d, stalled request-cycles %0d", parallel_grants, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
