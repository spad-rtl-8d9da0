// l2_xbar -- the chip's shared L2 and the crossbar in front of it (the paper's
// "32MB L2 Cache & Crossbar"; 32 MB on the Prefill Chip, 30 MB on the Decode
// Chip).
//
// NP requesters (every core's L1<->L2 engine, the memory controller and the
// two sides of the interconnect interface) reach NBANKS single-ported banks.
// Words of WB bits are interleaved over the banks by the low address bits.
// Each cycle every bank grants at most one of the requests aimed at it,
// round-robin starting after the last port it granted, so requests to
// different banks proceed in parallel and no requester starves. A request is
// held (valid high, fields stable) until req_ready; the grant cycle performs
// the write or the read, and read data appear on rsp_valid/rsp_data of the
// same port one cycle later. Like the L1 it is a software-managed buffer, not
// a tagged cache: the paper gives the size and names a crossbar but no
// organisation, so banking, arbitration and the protocol are this design's.
module l2_xbar #(
  parameter int unsigned NP       = 7,
  parameter int unsigned L2_BYTES = 33554432,
  parameter int unsigned WB       = 512,
  parameter int unsigned NBANKS   = 16,
  localparam int unsigned WORDS   = L2_BYTES / (WB / 8),
  localparam int unsigned BDEPTH  = WORDS / NBANKS,
  localparam int unsigned BW      = (NBANKS > 1) ? $clog2(NBANKS) : 1,
  localparam int unsigned IW      = (BDEPTH > 1) ? $clog2(BDEPTH) : 1,
  localparam int unsigned PW      = (NP > 1) ? $clog2(NP) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NP-1:0]          req_valid,
  input  logic [NP-1:0]          req_we,
  input  logic [NP-1:0][31:0]    req_addr,
  input  logic [NP-1:0][WB-1:0]  req_wdata,
  output logic [NP-1:0]          req_ready,
  output logic [NP-1:0]          rsp_valid,
  output logic [NP-1:0][WB-1:0]  rsp_data
);

  initial begin
    assert ((NBANKS & (NBANKS - 1)) == 0 && WORDS % NBANKS == 0)
      else $fatal(1, "l2_xbar: NBANKS must be a power of two dividing the word count");
  end

  function automatic logic [BW-1:0] bank_of(input logic [31:0] a);
    return (NBANKS > 1) ? BW'(a % NBANKS) : '0;
  endfunction

  function automatic logic [IW-1:0] index_of(input logic [31:0] a);
    return IW'(a / NBANKS);
  endfunction

  logic [NBANKS-1:0][PW-1:0] rr_last;   // last granted port per bank
  logic [NBANKS-1:0]         g_any;
  logic [NBANKS-1:0][PW-1:0] g_port;

  // Round-robin arbitration per bank.
  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      g_any[b]  = 1'b0;
      g_port[b] = '0;
      for (int p = 0; p < NP; p++) begin
        if (!g_any[b] && p > int'(rr_last[b]) && req_valid[p] && bank_of(req_addr[p]) == BW'(b)) begin
          g_any[b]  = 1'b1;
          g_port[b] = PW'(p);
        end
      end
      for (int p = 0; p < NP; p++) begin
        if (!g_any[b] && p <= int'(rr_last[b]) && req_valid[p] && bank_of(req_addr[p]) == BW'(b)) begin
          g_any[b]  = 1'b1;
          g_port[b] = PW'(p);
        end
      end
    end
  end

  always_comb begin
    req_ready = '0;
    for (int b = 0; b < NBANKS; b++)
      if (g_any[b]) req_ready[g_port[b]] = 1'b1;
  end

  // Banks.
  logic [NBANKS-1:0][WB-1:0] bank_rdata;
  logic [NBANKS-1:0]         rd_done;       // bank performed a read last cycle
  logic [NBANKS-1:0][PW-1:0] rd_port;       // ... for this port

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic [WB-1:0] mem [BDEPTH];
    logic [WB-1:0] rdata_q;
    always_ff @(posedge clk) begin
      if (g_any[b]) begin
        if (req_we[g_port[b]]) mem[index_of(req_addr[g_port[b]])] <= req_wdata[g_port[b]];
        else                   rdata_q <= mem[index_of(req_addr[g_port[b]])];
      end
    end
    assign bank_rdata[b] = rdata_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_last <= '0;
      rd_done <= '0;
      rd_port <= '0;
    end else begin
      for (int b = 0; b < NBANKS; b++) begin
        rd_done[b] <= g_any[b] && !req_we[g_port[b]];
        rd_port[b] <= g_port[b];
        if (g_any[b]) rr_last[b] <= g_port[b];
      end
    end
  end

  always_comb begin
    rsp_valid = '0;
    rsp_data  = '0;
    for (int b = 0; b < NBANKS; b++) begin
      if (rd_done[b]) begin
        rsp_valid[rd_port[b]] = 1'b1;
        rsp_data[rd_port[b]]  = bank_rdata[b];
      end
    end
  end

  // A granted request must not change before it is accepted (protocol rule).
  for (genvar p = 0; p < NP; p++) begin : g_chk
    property p_hold;
      @(posedge clk) disable iff (!rst_n)
        req_valid[p] && !req_ready[p] |=> req_valid[p] && $stable(req_addr[p]) && $stable(req_we[p]);
    endproperty
    a_hold : assert property (p_hold) else $error("l2_xbar: port %0d dropped or changed a pending request", p);
  end

endmodule
