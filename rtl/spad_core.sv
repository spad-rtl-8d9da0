// spad_core -- one SPAD core (the paper's Prefill Core x128 / Decode Core x144):
// LANES lanes, each with a systolic array and a vector unit, sharing an L1,
// plus an engine that moves words between the L1 and the chip's L2.
//
// Commands arrive one per cycle on cmd_valid/cmd_ready (ready means the
// command was taken). OP_MATMUL and OP_VEC go to lane cmd.lane and are
// accepted when that lane is idle, so the lanes work in parallel. OP_L2_LOAD
// (L2 addr0.. -> L1 addr2..) and OP_L2_STORE (L1 addr0.. -> L2 addr2..) go to
// the transfer engine, accepted when it is idle; it moves one word at a time
// over the core's crossbar port: a load word costs the L2 grant cycle plus the
// response cycle, a store word one L1 read cycle plus the grant cycle.
// busy is high while any lane or the engine has work. Software orders
// dependent commands by waiting for busy to fall. The lane count and L1 size
// are the paper's; command set, dispatch and transfer engine are this
// design's own.
module spad_core
  import spad_pkg::*;
#(
  parameter int unsigned DIM      = 32,
  parameter int unsigned VW       = 16,
  parameter int unsigned LANES    = 4,
  parameter int unsigned L1_BYTES = 327680,
  localparam int unsigned WB      = DIM * 16,
  localparam int unsigned AW      = $clog2(L1_BYTES / (WB / 8))
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
  input  logic [WB-1:0] l2_rsp_data
);

  localparam int unsigned NRD = 2 * LANES + 1;
  localparam int unsigned NWR = LANES + 1;

  logic [NRD-1:0]         rd_en;
  logic [NRD-1:0][AW-1:0] rd_addr;
  logic [NRD-1:0][WB-1:0] rd_data;
  logic [NWR-1:0]         wr_en;
  logic [NWR-1:0][AW-1:0] wr_addr;
  logic [NWR-1:0][WB-1:0] wr_data;

  l1_cache #(.L1_BYTES(L1_BYTES), .WB(WB), .NRD(NRD), .NWR(NWR)) u_l1 (
    .clk    (clk),
    .rd_en  (rd_en),
    .rd_addr(rd_addr),
    .rd_data(rd_data),
    .wr_en  (wr_en),
    .wr_addr(wr_addr),
    .wr_data(wr_data)
  );

  // ---------------- lanes ----------------
  logic [LANES-1:0] lane_ready, lane_busy, lane_valid;
  logic             is_lane_op, is_dma_op, dma_ready;

  assign is_lane_op = (cmd.op == OP_MATMUL) || (cmd.op == OP_VEC);
  assign is_dma_op  = (cmd.op == OP_L2_LOAD) || (cmd.op == OP_L2_STORE);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    assign lane_valid[l] = cmd_valid && is_lane_op && (32'(cmd.lane) == l);
    lane #(.DIM(DIM), .VW(VW), .AW(AW)) u_lane (
      .clk      (clk),
      .rst_n    (rst_n),
      .cmd_valid(lane_valid[l]),
      .cmd      (cmd),
      .cmd_ready(lane_ready[l]),
      .busy     (lane_busy[l]),
      .rd0_en   (rd_en[2*l]),
      .rd0_addr (rd_addr[2*l]),
      .rd0_data (rd_data[2*l]),
      .rd1_en   (rd_en[2*l+1]),
      .rd1_addr (rd_addr[2*l+1]),
      .rd1_data (rd_data[2*l+1]),
      .wr_en    (wr_en[l]),
      .wr_addr  (wr_addr[l]),
      .wr_data  (wr_data[l])
    );
  end

  always_comb begin
    cmd_ready = 1'b0;
    if (is_lane_op) begin
      for (int l = 0; l < LANES; l++)
        if (32'(cmd.lane) == l) cmd_ready = lane_ready[l];
    end else if (is_dma_op) begin
      cmd_ready = dma_ready;
    end
  end

  // ---------------- L1 <-> L2 transfer engine ----------------
  typedef enum logic [2:0] {D_IDLE, D_LD_REQ, D_LD_RSP, D_ST_RD, D_ST_REQ} dstate_e;
  dstate_e     dstate;
  logic [31:0] d_src, d_dst, d_left;

  assign dma_ready = (dstate == D_IDLE);
  assign busy      = (|lane_busy) || (dstate != D_IDLE);

  assign l2_req_valid = (dstate == D_LD_REQ) || (dstate == D_ST_REQ);
  assign l2_req_we    = (dstate == D_ST_REQ);
  assign l2_req_addr  = (dstate == D_ST_REQ) ? d_dst : d_src;
  assign l2_req_wdata = rd_data[NRD-1];

  assign rd_en[NRD-1]   = (dstate == D_ST_RD);
  assign rd_addr[NRD-1] = AW'(d_src);
  assign wr_en[NWR-1]   = (dstate == D_LD_RSP) && l2_rsp_valid;
  assign wr_addr[NWR-1] = AW'(d_dst);
  assign wr_data[NWR-1] = l2_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate <= D_IDLE;
      d_src  <= '0;
      d_dst  <= '0;
      d_left <= '0;
    end else begin
      unique case (dstate)
        D_IDLE: begin
          if (cmd_valid && is_dma_op) begin
            d_src  <= cmd.addr0;
            d_dst  <= cmd.addr2;
            d_left <= cmd.len;
            if (cmd.len != 0) dstate <= (cmd.op == OP_L2_LOAD) ? D_LD_REQ : D_ST_RD;
          end
        end
        D_LD_REQ: if (l2_req_ready) dstate <= D_LD_RSP;
        D_LD_RSP: begin
          if (l2_rsp_valid) begin
            d_src  <= d_src + 1;
            d_dst  <= d_dst + 1;
            d_left <= d_left - 1;
            dstate <= (d_left == 1) ? D_IDLE : D_LD_REQ;
          end
        end
        D_ST_RD: dstate <= D_ST_REQ;
        D_ST_REQ: begin
          if (l2_req_ready) begin
            d_src  <= d_src + 1;
            d_dst  <= d_dst + 1;
            d_left <= d_left - 1;
            dstate <= (d_left == 1) ? D_IDLE : D_ST_RD;
          end
        end
        default: dstate <= D_IDLE;
      endcase
    end
  end

endmodule
