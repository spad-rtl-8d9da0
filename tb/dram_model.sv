// dram_model -- behavioural stand-in for the device memory (GDDR7 or HBM3
// behind its PHY) seen by mem_ctrl. Requests are accepted when req_ready
// (high on random cycles); read data return in order LAT cycles after
// acceptance. The array mem is written directly by testbenches to preload
// and inspect contents. Not synthesizable; testbench use only.
module dram_model #(
  parameter int WB    = 64,
  parameter int DEPTH = 256,
  parameter int LAT   = 6
) (
  input  logic          clk,
  input  logic          req_valid,
  input  logic          req_we,
  input  logic [31:0]   req_addr,
  input  logic [WB-1:0] req_wdata,
  output logic          req_ready,
  output logic          rsp_valid,
  output logic [WB-1:0] rsp_data
);
  logic [WB-1:0] mem [DEPTH];
  logic [WB-1:0] pipe_d [LAT];
  logic          pipe_v [LAT];
  logic          rdy_q = 1'b0;

  initial for (int i = 0; i < LAT; i++) pipe_v[i] = 1'b0;

  assign req_ready = rdy_q;
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data  = pipe_d[LAT-1];

  always @(posedge clk) begin
    rdy_q <= ($urandom_range(0, 3) != 0);
    for (int i = LAT - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req_we) mem[req_addr % DEPTH] <= req_wdata;
      else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= mem[req_addr % DEPTH];
      end
    end
  end
endmodule
