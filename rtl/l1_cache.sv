// l1_cache -- per-core L1 buffer (320 KB on the Prefill Chip, 128 KB on the
// Decode Chip, as in the paper's Table 3).
//
// The paper calls it a cache but gives no organisation; here it is a
// software-managed scratchpad, addressed in words of WB bits, that the
// sequencers of the lanes and the core's L2 transfer engine read and write
// directly (no tags, no misses). It has NRD read ports and NWR write ports so
// that all four lanes can stream operands at full rate at once: a read
// returns the word on the cycle after rd_en. A read and a write of the same
// word in one cycle return the old word. Several writes to one word in a
// cycle: the highest-numbered port wins. The multi-port array is a modelling
// choice of this design; a physical L1 would be banked.
module l1_cache #(
  parameter int unsigned L1_BYTES = 327680,
  parameter int unsigned WB       = 512,
  parameter int unsigned NRD      = 9,
  parameter int unsigned NWR      = 5,
  localparam int unsigned DEPTH   = L1_BYTES / (WB / 8),
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic [NRD-1:0]          rd_en,
  input  logic [NRD-1:0][AW-1:0]  rd_addr,
  output logic [NRD-1:0][WB-1:0]  rd_data,
  input  logic [NWR-1:0]          wr_en,
  input  logic [NWR-1:0][AW-1:0]  wr_addr,
  input  logic [NWR-1:0][WB-1:0]  wr_data
);

  logic [WB-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NRD; p++)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
    for (int p = 0; p < NWR; p++)
      if (wr_en[p]) mem[wr_addr[p]] <= wr_data[p];
  end

endmodule
