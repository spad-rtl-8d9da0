// tb_l1_cache -- random reads and writes on every port of a small L1
// against a reference array: one-cycle read latency, read-before-write on
// the same word, and highest write port winning a collision.
module tb_l1_cache;
  localparam int L1_BYTES = 256, WB = 32, NRD = 3, NWR = 2, DEPTH = 64, AW = 6;
  logic clk = 0;
  logic [NRD-1:0] rd_en;
  logic [NRD-1:0][AW-1:0] rd_addr;
  logic [NRD-1:0][WB-1:0] rd_data;
  logic [NWR-1:0] wr_en;
  logic [NWR-1:0][AW-1:0] wr_addr;
  logic [NWR-1:0][WB-1:0] wr_data;
  logic [WB-1:0] refm [DEPTH];
  logic [NRD-1:0][WB-1:0] expect_d;
  logic [NRD-1:0] was_rd;
  int checks = 0, failures = 0;

  l1_cache #(.L1_BYTES(L1_BYTES), .WB(WB), .NRD(NRD), .NWR(NWR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = '0; wr_en = '0; rd_addr = '0; wr_addr = '0; wr_data = '0; was_rd = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 2'b01; wr_addr[0] = AW'(i); wr_data[0] = $urandom; refm[i] = wr_data[0];
    end
    @(negedge clk) wr_en = '0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        if (was_rd[p]) begin
          checks++;
          if (rd_data[p] !== expect_d[p]) begin
            failures++;
            $display("FAIL: port %0d read %h expected %h", p, rd_data[p], expect_d[p]);
          end
        end
      end
      for (int p = 0; p < NRD; p++) begin
        rd_en[p] = 1'($urandom);
        rd_addr[p] = AW'($urandom_range(0, 7));
        was_rd[p] = rd_en[p];
        expect_d[p] = refm[rd_addr[p]];
      end
      for (int p = 0; p < NWR; p++) begin
        wr_en[p] = 1'($urandom);
        wr_addr[p] = AW'($urandom_range(0, 7));
        wr_data[p] = $urandom;
      end
      for (int p = 0; p < NWR; p++) if (wr_en[p]) refm[wr_addr[p]] = wr_data[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
