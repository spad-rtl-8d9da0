// spad_chip -- one SPAD chip. Apart from the core count the defaults are the
// paper's Prefill Chip (Table 3, Figure 4): cores of 4 lanes, each lane a
// 32x32 FP16 systolic array and a 16-wide FP32 vector unit, 320 KB of L1 per
// core, a 32 MB L2 behind a crossbar, a GDDR7 memory controller and an
// interconnect interface. The Decode Chip is the same template with DIM=16,
// VW=8, L1_BYTES=131072 and L2_BYTES=31457280 (HBM3 memory).
// The paper's chips have 128 (prefill) and 144 (decode) cores. NCORES
// defaults to 2 because elaborating a flattened 32x32 FP16 array core costs
// about 2 GB of tool memory, so a 128-core build would need roughly 250 GB,
// and lint and synthesis of several blocks must fit side by side; set
// NCORES=128 for the full chip. Everything else scales unchanged.
//
// A host (over PCIe on the real chip; that block is not part of the RTL)
// pushes cmd_t commands on cmd_valid/cmd_ready. They are routed by opcode:
// matmul, vector and L1<->L2 commands to core cmd.core, memory commands to the
// memory controller, link sends to the interconnect interface. A command is
// taken when its target engine is idle; busy is high while any engine works.
// The host orders dependent commands by waiting for busy to fall. Every
// requester reaches the L2 through the crossbar: port c is core c, then the
// memory controller, the link sender and the link receiver. The device memory
// port and the two link directions are brought out to the chip's pins.
// Per-core counts and sizes are the paper's; the command interface is this
// design's own.
module spad_chip
  import spad_pkg::*;
#(
  parameter int unsigned NCORES   = 2,
  parameter int unsigned DIM      = 32,
  parameter int unsigned VW       = 16,
  parameter int unsigned LANES    = 4,
  parameter int unsigned L1_BYTES = 327680,
  parameter int unsigned L2_BYTES = 33554432,
  parameter int unsigned NBANKS   = 16,
  parameter int unsigned LB       = 256,
  localparam int unsigned WB      = DIM * 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // host command port
  input  logic          cmd_valid,
  input  cmd_t          cmd,
  output logic          cmd_ready,
  output logic          busy,
  // device memory port
  output logic          mem_req_valid,
  output logic          mem_req_we,
  output logic [31:0]   mem_req_addr,
  output logic [WB-1:0] mem_req_wdata,
  input  logic          mem_req_ready,
  input  logic          mem_rsp_valid,
  input  logic [WB-1:0] mem_rsp_data,
  // interconnect link
  output logic          link_tx_valid,
  output logic [31:0]   link_tx_addr,
  output logic [LB-1:0] link_tx_data,
  input  logic          link_tx_ready,
  input  logic          link_rx_valid,
  input  logic [31:0]   link_rx_addr,
  input  logic [LB-1:0] link_rx_data,
  output logic          link_rx_ready
);

  localparam int unsigned NP    = NCORES + 3;
  localparam int unsigned P_MEM = NCORES;
  localparam int unsigned P_TX  = NCORES + 1;
  localparam int unsigned P_RX  = NCORES + 2;

  logic [NP-1:0]         req_valid, req_we, req_ready, rsp_valid;
  logic [NP-1:0][31:0]   req_addr;
  logic [NP-1:0][WB-1:0] req_wdata, rsp_data;

  l2_xbar #(.NP(NP), .L2_BYTES(L2_BYTES), .WB(WB), .NBANKS(NBANKS)) u_l2 (
    .clk      (clk),
    .rst_n    (rst_n),
    .req_valid(req_valid),
    .req_we   (req_we),
    .req_addr (req_addr),
    .req_wdata(req_wdata),
    .req_ready(req_ready),
    .rsp_valid(rsp_valid),
    .rsp_data (rsp_data)
  );

  // ---------------- command routing ----------------
  logic             to_core, to_mem, to_ic;
  logic [NCORES-1:0] core_valid, core_ready, core_busy;
  logic             mem_ready, mem_busy, ic_ready, ic_busy;

  assign to_core = (cmd.op == OP_MATMUL) || (cmd.op == OP_VEC) ||
                   (cmd.op == OP_L2_LOAD) || (cmd.op == OP_L2_STORE);
  assign to_mem  = (cmd.op == OP_MEM_LOAD) || (cmd.op == OP_MEM_STORE);
  assign to_ic   = (cmd.op == OP_IC_SEND);

  always_comb begin
    cmd_ready = 1'b0;
    if (to_core) begin
      for (int c = 0; c < NCORES; c++)
        if (32'(cmd.core) == c) cmd_ready = core_ready[c];
    end else if (to_mem) begin
      cmd_ready = mem_ready;
    end else if (to_ic) begin
      cmd_ready = ic_ready;
    end
  end

  assign busy = (|core_busy) || mem_busy || ic_busy;

  // ---------------- cores ----------------
  for (genvar c = 0; c < NCORES; c++) begin : g_core
    assign core_valid[c] = cmd_valid && to_core && (32'(cmd.core) == c);
    spad_core #(.DIM(DIM), .VW(VW), .LANES(LANES), .L1_BYTES(L1_BYTES)) u_core (
      .clk         (clk),
      .rst_n       (rst_n),
      .cmd_valid   (core_valid[c]),
      .cmd         (cmd),
      .cmd_ready   (core_ready[c]),
      .busy        (core_busy[c]),
      .l2_req_valid(req_valid[c]),
      .l2_req_we   (req_we[c]),
      .l2_req_addr (req_addr[c]),
      .l2_req_wdata(req_wdata[c]),
      .l2_req_ready(req_ready[c]),
      .l2_rsp_valid(rsp_valid[c]),
      .l2_rsp_data (rsp_data[c])
    );
  end

  // ---------------- memory controller ----------------
  mem_ctrl #(.WB(WB)) u_mc (
    .clk          (clk),
    .rst_n        (rst_n),
    .cmd_valid    (cmd_valid && to_mem),
    .cmd          (cmd),
    .cmd_ready    (mem_ready),
    .busy         (mem_busy),
    .l2_req_valid (req_valid[P_MEM]),
    .l2_req_we    (req_we[P_MEM]),
    .l2_req_addr  (req_addr[P_MEM]),
    .l2_req_wdata (req_wdata[P_MEM]),
    .l2_req_ready (req_ready[P_MEM]),
    .l2_rsp_valid (rsp_valid[P_MEM]),
    .l2_rsp_data  (rsp_data[P_MEM]),
    .mem_req_valid(mem_req_valid),
    .mem_req_we   (mem_req_we),
    .mem_req_addr (mem_req_addr),
    .mem_req_wdata(mem_req_wdata),
    .mem_req_ready(mem_req_ready),
    .mem_rsp_valid(mem_rsp_valid),
    .mem_rsp_data (mem_rsp_data)
  );

  // ---------------- interconnect interface ----------------
  assign req_we[P_TX]    = 1'b0;
  assign req_wdata[P_TX] = '0;
  assign req_we[P_RX]    = 1'b1;

  ic_if #(.WB(WB), .LB(LB)) u_ic (
    .clk            (clk),
    .rst_n          (rst_n),
    .cmd_valid      (cmd_valid && to_ic),
    .cmd            (cmd),
    .cmd_ready      (ic_ready),
    .busy           (ic_busy),
    .tx_l2_req_valid(req_valid[P_TX]),
    .tx_l2_req_addr (req_addr[P_TX]),
    .tx_l2_req_ready(req_ready[P_TX]),
    .tx_l2_rsp_valid(rsp_valid[P_TX]),
    .tx_l2_rsp_data (rsp_data[P_TX]),
    .rx_l2_req_valid(req_valid[P_RX]),
    .rx_l2_req_addr (req_addr[P_RX]),
    .rx_l2_req_wdata(req_wdata[P_RX]),
    .rx_l2_req_ready(req_ready[P_RX]),
    .tx_valid       (link_tx_valid),
    .tx_addr        (link_tx_addr),
    .tx_data        (link_tx_data),
    .tx_ready       (link_tx_ready),
    .rx_valid       (link_rx_valid),
    .rx_addr        (link_rx_addr),
    .rx_data        (link_rx_data),
    .rx_ready       (link_rx_ready)
  );

endmodule
