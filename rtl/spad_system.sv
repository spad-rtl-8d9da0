// spad_system -- the disaggregated SPAD pair: one Prefill Chip and one Decode
// Chip, with the Prefill Chip's outgoing link feeding the Decode Chip's
// incoming link.
//
// In SPAD serving a request's prefill runs on a Prefill Chip, which then
// ships the KV cache it produced to a Decode Chip that generates the output
// tokens (the paper's Section 4). Here that hand-over is a direct link: an
// OP_IC_SEND on the Prefill Chip writes words of its L2 into the Decode
// Chip's L2 at the byte address the command names. The chips have their own
// host command ports and device-memory ports (GDDR7 for prefill, HBM3 for
// decode; the memories themselves are outside the RTL). The Decode Chip's
// outgoing link and the Prefill Chip's incoming link are brought out to pins
// so that more chips can be attached. The link width is 256 bits, the Decode
// Chip's word width, so a 512-bit Prefill word crosses as two flits.
// Parameter defaults are the paper's Table 3 configurations except the core
// counts, 2 and 4 instead of 128 and 144, kept small so the whole pair can be
// elaborated in a few GB (see spad_chip). A single clock and reset serve both
// chips; the paper runs tensor and non-tensor units at 1.83 and 1.98 GHz.
module spad_system
  import spad_pkg::*;
#(
  // Prefill Chip
  parameter int unsigned P_NCORES   = 2,
  parameter int unsigned P_DIM      = 32,
  parameter int unsigned P_VW       = 16,
  parameter int unsigned P_L1_BYTES = 327680,
  parameter int unsigned P_L2_BYTES = 33554432,
  // Decode Chip
  parameter int unsigned D_NCORES   = 4,
  parameter int unsigned D_DIM      = 16,
  parameter int unsigned D_VW       = 8,
  parameter int unsigned D_L1_BYTES = 131072,
  parameter int unsigned D_L2_BYTES = 31457280,
  // shared
  parameter int unsigned LANES      = 4,
  parameter int unsigned NBANKS     = 16,
  parameter int unsigned LB         = 256,
  localparam int unsigned P_WB      = P_DIM * 16,
  localparam int unsigned D_WB      = D_DIM * 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // Prefill Chip host port
  input  logic            p_cmd_valid,
  input  cmd_t            p_cmd,
  output logic            p_cmd_ready,
  output logic            p_busy,
  // Prefill Chip GDDR7 port
  output logic            p_mem_req_valid,
  output logic            p_mem_req_we,
  output logic [31:0]     p_mem_req_addr,
  output logic [P_WB-1:0] p_mem_req_wdata,
  input  logic            p_mem_req_ready,
  input  logic            p_mem_rsp_valid,
  input  logic [P_WB-1:0] p_mem_rsp_data,
  // Prefill Chip incoming link
  input  logic            p_link_rx_valid,
  input  logic [31:0]     p_link_rx_addr,
  input  logic [LB-1:0]   p_link_rx_data,
  output logic            p_link_rx_ready,
  // Decode Chip host port
  input  logic            d_cmd_valid,
  input  cmd_t            d_cmd,
  output logic            d_cmd_ready,
  output logic            d_busy,
  // Decode Chip HBM3 port
  output logic            d_mem_req_valid,
  output logic            d_mem_req_we,
  output logic [31:0]     d_mem_req_addr,
  output logic [D_WB-1:0] d_mem_req_wdata,
  input  logic            d_mem_req_ready,
  input  logic            d_mem_rsp_valid,
  input  logic [D_WB-1:0] d_mem_rsp_data,
  // Decode Chip outgoing link
  output logic            d_link_tx_valid,
  output logic [31:0]     d_link_tx_addr,
  output logic [LB-1:0]   d_link_tx_data,
  input  logic            d_link_tx_ready,
  // KV-cache link activity, for observation
  output logic            kv_flit
);

  logic          kv_valid, kv_ready;
  logic [31:0]   kv_addr;
  logic [LB-1:0] kv_data;

  assign kv_flit = kv_valid && kv_ready;

  spad_chip #(
    .NCORES(P_NCORES), .DIM(P_DIM), .VW(P_VW), .LANES(LANES),
    .L1_BYTES(P_L1_BYTES), .L2_BYTES(P_L2_BYTES), .NBANKS(NBANKS), .LB(LB)
  ) u_prefill (
    .clk          (clk),
    .rst_n        (rst_n),
    .cmd_valid    (p_cmd_valid),
    .cmd          (p_cmd),
    .cmd_ready    (p_cmd_ready),
    .busy         (p_busy),
    .mem_req_valid(p_mem_req_valid),
    .mem_req_we   (p_mem_req_we),
    .mem_req_addr (p_mem_req_addr),
    .mem_req_wdata(p_mem_req_wdata),
    .mem_req_ready(p_mem_req_ready),
    .mem_rsp_valid(p_mem_rsp_valid),
    .mem_rsp_data (p_mem_rsp_data),
    .link_tx_valid(kv_valid),
    .link_tx_addr (kv_addr),
    .link_tx_data (kv_data),
    .link_tx_ready(kv_ready),
    .link_rx_valid(p_link_rx_valid),
    .link_rx_addr (p_link_rx_addr),
    .link_rx_data (p_link_rx_data),
    .link_rx_ready(p_link_rx_ready)
  );

  spad_chip #(
    .NCORES(D_NCORES), .DIM(D_DIM), .VW(D_VW), .LANES(LANES),
    .L1_BYTES(D_L1_BYTES), .L2_BYTES(D_L2_BYTES), .NBANKS(NBANKS), .LB(LB)
  ) u_decode (
    .clk          (clk),
    .rst_n        (rst_n),
    .cmd_valid    (d_cmd_valid),
    .cmd          (d_cmd),
    .cmd_ready    (d_cmd_ready),
    .busy         (d_busy),
    .mem_req_valid(d_mem_req_valid),
    .mem_req_we   (d_mem_req_we),
    .mem_req_addr (d_mem_req_addr),
    .mem_req_wdata(d_mem_req_wdata),
    .mem_req_ready(d_mem_req_ready),
    .mem_rsp_valid(d_mem_rsp_valid),
    .mem_rsp_data (d_mem_rsp_data),
    .link_tx_valid(d_link_tx_valid),
    .link_tx_addr (d_link_tx_addr),
    .link_tx_data (d_link_tx_data),
    .link_tx_ready(d_link_tx_ready),
    .link_rx_valid(kv_valid),
    .link_rx_addr (kv_addr),
    .link_rx_data (kv_data),
    .link_rx_ready(kv_ready)
  );

endmodule
