// mem_ctrl -- digital side of the chip's device-memory interface: moves words
// between device memory (16 GDDR7 packages on a 512-bit bus for the Prefill
// Chip, five HBM3 stacks on 5120 bits for the Decode Chip) and the L2.
//
// OP_MEM_LOAD copies len words from device address addr0 to L2 address addr2;
// OP_MEM_STORE copies len words from L2 address addr0 to device address addr2.
// Addresses count WB-bit words. The device port is a plain request/response
// port: a request is held until mem_req_ready; a read's data return later on
// mem_rsp_valid, in order, with any latency. One command runs at a time and
// cmd_ready is high while idle. The engine keeps one word in flight, so its
// throughput is one word per (device latency + L2 grant) cycles: it does not
// model the paper's 2 TB/s (GDDR7) or 3.35 TB/s (HBM3) bandwidth, which is
// set by the PHYs and DRAM devices outside this RTL. Everything here apart
// from the memory types and widths it serves is this design's own choice.
module mem_ctrl
  import spad_pkg::*;
#(
  parameter int unsigned WB = 512
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  cmd_t          cmd,
  output logic          cmd_ready,
  output logic          busy,
  // L2 crossbar port
  output logic          l2_req_valid,
  output logic          l2_req_we,
  output logic [31:0]   l2_req_addr,
  output logic [WB-1:0] l2_req_wdata,
  input  logic          l2_req_ready,
  input  logic          l2_rsp_valid,
  input  logic [WB-1:0] l2_rsp_data,
  // device memory port (towards the GDDR7 / HBM3 PHY)
  output logic          mem_req_valid,
  output logic          mem_req_we,
  output logic [31:0]   mem_req_addr,
  output logic [WB-1:0] mem_req_wdata,
  input  logic          mem_req_ready,
  input  logic          mem_rsp_valid,
  input  logic [WB-1:0] mem_rsp_data
);

  typedef enum logic [2:0] {M_IDLE, M_LD_MREQ, M_LD_MRSP, M_LD_L2, M_ST_L2REQ, M_ST_L2RSP, M_ST_MREQ}
    mstate_e;

  mstate_e     st;
  logic [31:0] src, dst, left;
  logic [WB-1:0] buf_q;

  assign cmd_ready = (st == M_IDLE);
  assign busy      = (st != M_IDLE);

  assign mem_req_valid = (st == M_LD_MREQ) || (st == M_ST_MREQ);
  assign mem_req_we    = (st == M_ST_MREQ);
  assign mem_req_addr  = (st == M_ST_MREQ) ? dst : src;
  assign mem_req_wdata = buf_q;

  assign l2_req_valid = (st == M_LD_L2) || (st == M_ST_L2REQ);
  assign l2_req_we    = (st == M_LD_L2);
  assign l2_req_addr  = (st == M_LD_L2) ? dst : src;
  assign l2_req_wdata = buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= M_IDLE;
      src   <= '0;
      dst   <= '0;
      left  <= '0;
      buf_q <= '0;
    end else begin
      unique case (st)
        M_IDLE: begin
          if (cmd_valid && (cmd.op == OP_MEM_LOAD || cmd.op == OP_MEM_STORE)) begin
            src  <= cmd.addr0;
            dst  <= cmd.addr2;
            left <= cmd.len;
            if (cmd.len != 0) st <= (cmd.op == OP_MEM_LOAD) ? M_LD_MREQ : M_ST_L2REQ;
          end
        end
        M_LD_MREQ: if (mem_req_ready) st <= M_LD_MRSP;
        M_LD_MRSP: begin
          if (mem_rsp_valid) begin
            buf_q <= mem_rsp_data;
            st    <= M_LD_L2;
          end
        end
        M_LD_L2: begin
          if (l2_req_ready) begin
            src  <= src + 1;
            dst  <= dst + 1;
            left <= left - 1;
            st   <= (left == 1) ? M_IDLE : M_LD_MREQ;
          end
        end
        M_ST_L2REQ: if (l2_req_ready) st <= M_ST_L2RSP;
        M_ST_L2RSP: begin
          if (l2_rsp_valid) begin
            buf_q <= l2_rsp_data;
            st    <= M_ST_MREQ;
          end
        end
        M_ST_MREQ: begin
          if (mem_req_ready) begin
            src  <= src + 1;
            dst  <= dst + 1;
            left <= left - 1;
            st   <= (left == 1) ? M_IDLE : M_ST_L2REQ;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

endmodule
