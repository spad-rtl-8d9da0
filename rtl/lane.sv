// lane -- one lane of a SPAD core: a DIM x DIM systolic array and a VW-wide
// vector unit, each with the sequencer that streams its operands out of the
// core's L1 and writes its results back (the paper's Figure 4 shows four such
// lanes per core).
//
// The lane runs one command at a time; cmd_ready is high while it is idle.
//  OP_MATMUL: A is K words at addr0 (word k = column k of A, DIM FP16 values),
//    B is K words at addr1 (word k = row k of B), K = len. The array is
//    cleared, one column/row pair is streamed per cycle, and when the array is
//    empty its DIM FP32 result rows are written to addr2, two words per row
//    (low half = columns 0..DIM/2-1), row r at addr2 + 2r.
//    Cycles from accept to idle: K + 4*DIM + 2 for K > 0.
//  OP_VEC: len words at addr0 and addr1 (VW FP32 values each) are combined by
//    the vector unit (vop, scalar) and written to addr2 onwards, one word per
//    cycle after a three-cycle pipeline: len + 3 cycles from accept to idle.
// L1 reads return data on the cycle after the request. An L1 word holds DIM
// FP16 values or VW FP32 values, so DIM*16 must equal VW*32; this holds for
// both of the paper's chips (32*16 = 16*32, 16*16 = 8*32). The lane-local
// sequencing is this design's own; the paper only names the lane.
module lane
  import spad_pkg::*;
#(
  parameter int unsigned DIM = 32,
  parameter int unsigned VW  = 16,
  parameter int unsigned AW  = 13,             // L1 word-address width
  localparam int unsigned WB = DIM * 16        // L1 word width in bits
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  cmd_t          cmd,
  output logic          cmd_ready,
  output logic          busy,
  output logic          rd0_en,
  output logic [AW-1:0] rd0_addr,
  input  logic [WB-1:0] rd0_data,
  output logic          rd1_en,
  output logic [AW-1:0] rd1_addr,
  input  logic [WB-1:0] rd1_data,
  output logic          wr_en,
  output logic [AW-1:0] wr_addr,
  output logic [WB-1:0] wr_data
);

  initial begin
    assert (DIM * 16 == VW * 32)
      else $fatal(1, "lane: DIM*16 must equal VW*32");
  end

  typedef enum logic [2:0] {S_IDLE, S_MM_CLEAR, S_MM_STREAM, S_MM_WAIT, S_MM_DRAIN, S_VEC}
    state_e;

  state_e      state;
  cmd_t        c;
  logic [31:0] cnt;        // issued reads (stream / vec) or drained row (drain)
  logic [31:0] wcnt;       // vector results written
  logic        half;       // drain: which half of the row is written
  logic        feed;       // read issued last cycle, data present now

  logic                sa_clear, sa_drain, sa_busy;
  logic [DIM-1:0][31:0] sa_c_row;
  logic                vu_out_valid;
  logic [VW-1:0][31:0] vu_y;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // Read issue.
  always_comb begin
    rd0_en   = 1'b0;
    rd1_en   = 1'b0;
    rd0_addr = AW'(c.addr0 + cnt);
    rd1_addr = AW'(c.addr1 + cnt);
    if ((state == S_MM_STREAM || state == S_VEC) && cnt < c.len) begin
      rd0_en = 1'b1;
      rd1_en = 1'b1;
    end
  end

  assign sa_clear = (state == S_MM_CLEAR);
  assign sa_drain = (state == S_MM_DRAIN) && half;

  systolic_array #(.DIM(DIM)) u_sa (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (sa_clear),
    .drain   (sa_drain),
    .in_valid(feed && state != S_VEC),
    .a_col   (rd0_data),
    .b_row   (rd1_data),
    .c_row   (sa_c_row),
    .busy    (sa_busy)
  );

  vector_unit #(.VW(VW)) u_vu (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (feed && state == S_VEC),
    .op       (c.vop),
    .scalar   (c.scalar),
    .a        (rd0_data),
    .b        (rd1_data),
    .out_valid(vu_out_valid),
    .y        (vu_y)
  );

  // Write-back.
  always_comb begin
    wr_en   = 1'b0;
    wr_addr = AW'(c.addr2 + wcnt);
    wr_data = vu_y;
    if (state == S_MM_DRAIN) begin
      wr_en   = 1'b1;
      wr_addr = AW'(c.addr2 + 2 * cnt + 32'(half));
      wr_data = half ? sa_c_row[DIM-1:DIM/2] : sa_c_row[DIM/2-1:0];
    end else if (state == S_VEC && vu_out_valid) begin
      wr_en = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      cnt   <= '0;
      wcnt  <= '0;
      half  <= 1'b0;
      feed  <= 1'b0;
    end else begin
      feed <= rd0_en;
      unique case (state)
        S_IDLE: begin
          if (cmd_valid) begin
            c    <= cmd;
            cnt  <= '0;
            wcnt <= '0;
            half <= 1'b0;
            if (cmd.op == OP_MATMUL)   state <= S_MM_CLEAR;
            else if (cmd.op == OP_VEC) state <= (cmd.len == 0) ? S_IDLE : S_VEC;
          end
        end
        S_MM_CLEAR: state <= S_MM_STREAM;
        S_MM_STREAM: begin
          if (cnt < c.len) cnt <= cnt + 1;
          else begin
            cnt   <= '0;
            state <= S_MM_WAIT;
          end
        end
        S_MM_WAIT: if (!sa_busy && !feed) state <= S_MM_DRAIN;
        S_MM_DRAIN: begin
          half <= ~half;
          if (half) begin
            if (cnt == DIM - 1) state <= S_IDLE;
            cnt <= cnt + 1;
          end
        end
        S_VEC: begin
          if (cnt < c.len) cnt <= cnt + 1;
          if (vu_out_valid) begin
            wcnt <= wcnt + 1;
            if (wcnt == c.len - 1) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
