// ic_if -- digital side of the chip's interconnect interface (the paper's
// 900 GB/s "Interconnect Interface"), over which a Prefill Chip hands the KV
// cache it computed to a Decode Chip.
//
// The link carries remote-write flits: a byte address in the receiver's L2
// and LB bits of data, with valid/ready flow control on each direction.
//  Send side: OP_IC_SEND reads len words from local L2 address addr0 and emits
//    each as WB/LB flits, lowest part first, to remote byte address addr2
//    onwards. One command at a time; cmd_ready is high while the sender idles.
//  Receive side: flits are gathered into a WB-bit word; the flit that fills
//    the top part of a word triggers one L2 write at byte address / (WB/8),
//    during which rx_ready is low. Parts of a word must arrive in order and
//    back to back, which the send side guarantees.
// LB must divide both chips' word widths (256 and 512 bits at full size), so
// chips with different word widths can talk. The paper does not describe the
// link's protocol; flit format and flow control are this design's own.
// Physical layer, switches and the 900/50 GB/s bandwidths are outside it.
module ic_if
  import spad_pkg::*;
#(
  parameter int unsigned WB = 512,
  parameter int unsigned LB = 256,
  localparam int unsigned NPART = WB / LB
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  cmd_t          cmd,
  output logic          cmd_ready,
  output logic          busy,
  // L2 port of the send side
  output logic          tx_l2_req_valid,
  output logic [31:0]   tx_l2_req_addr,
  input  logic          tx_l2_req_ready,
  input  logic          tx_l2_rsp_valid,
  input  logic [WB-1:0] tx_l2_rsp_data,
  // L2 port of the receive side (writes only)
  output logic          rx_l2_req_valid,
  output logic [31:0]   rx_l2_req_addr,
  output logic [WB-1:0] rx_l2_req_wdata,
  input  logic          rx_l2_req_ready,
  // link, outgoing
  output logic          tx_valid,
  output logic [31:0]   tx_addr,
  output logic [LB-1:0] tx_data,
  input  logic          tx_ready,
  // link, incoming
  input  logic          rx_valid,
  input  logic [31:0]   rx_addr,
  input  logic [LB-1:0] rx_data,
  output logic          rx_ready
);

  localparam int unsigned WBYTES = WB / 8;
  localparam int unsigned LBYTES = LB / 8;

  initial begin
    assert (WB % LB == 0 && LB % 8 == 0) else $fatal(1, "ic_if: LB must divide WB");
  end

  // ---------------- send side ----------------
  typedef enum logic [1:0] {T_IDLE, T_REQ, T_RSP, T_SEND} tstate_e;
  tstate_e     ts;
  logic [31:0] t_src, t_dst, t_left;
  logic [WB-1:0] t_word;
  logic [$clog2(NPART+1)-1:0] t_part;

  assign cmd_ready       = (ts == T_IDLE);
  assign tx_l2_req_valid = (ts == T_REQ);
  assign tx_l2_req_addr  = t_src;
  assign tx_valid        = (ts == T_SEND);
  assign tx_addr         = t_dst + 32'(t_part) * LBYTES;
  assign tx_data         = t_word[t_part*LB +: LB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts     <= T_IDLE;
      t_src  <= '0;
      t_dst  <= '0;
      t_left <= '0;
      t_word <= '0;
      t_part <= '0;
    end else begin
      unique case (ts)
        T_IDLE: begin
          if (cmd_valid && cmd.op == OP_IC_SEND) begin
            t_src  <= cmd.addr0;
            t_dst  <= cmd.addr2;
            t_left <= cmd.len;
            if (cmd.len != 0) ts <= T_REQ;
          end
        end
        T_REQ: if (tx_l2_req_ready) ts <= T_RSP;
        T_RSP: begin
          if (tx_l2_rsp_valid) begin
            t_word <= tx_l2_rsp_data;
            t_part <= '0;
            ts     <= T_SEND;
          end
        end
        T_SEND: begin
          if (tx_ready) begin
            if (32'(t_part) == NPART - 1) begin
              t_src  <= t_src + 1;
              t_dst  <= t_dst + WBYTES;
              t_left <= t_left - 1;
              ts     <= (t_left == 1) ? T_IDLE : T_REQ;
            end
            t_part <= t_part + 1'b1;
          end
        end
        default: ts <= T_IDLE;
      endcase
    end
  end

  // ---------------- receive side ----------------
  logic [WB-1:0] r_word;
  logic          r_pend;          // full word waiting for its L2 write
  logic [31:0]   r_waddr;
  logic [31:0]   rx_part;

  assign rx_part         = (rx_addr / LBYTES) % NPART;
  assign rx_ready        = !r_pend;
  assign rx_l2_req_valid = r_pend;
  assign rx_l2_req_addr  = r_waddr;
  assign rx_l2_req_wdata = r_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_word  <= '0;
      r_pend  <= 1'b0;
      r_waddr <= '0;
    end else begin
      if (r_pend && rx_l2_req_ready) r_pend <= 1'b0;
      if (rx_valid && rx_ready) begin
        r_word[rx_part*LB +: LB] <= rx_data;
        if (rx_part == NPART - 1) begin
          r_pend  <= 1'b1;
          r_waddr <= rx_addr / WBYTES;
        end
      end
    end
  end

  assign busy = (ts != T_IDLE) || r_pend;

endmodule
