// pool_index_buffer -- on-chip store of the 2-bit max-pooling indexes.
//
// Max pooling over a 2x2 window records, per output pixel and channel, which
// of the four inputs was the largest (a 2-bit integer, as in the paper). In
// FP the pooling kernel writes the T indexes of one output pixel at once
// (wr_all); in BP the indexes come back from DRAM on the WEI channel, P per
// stream beat (wr_lane selects channels wlane*P..). Reads are combinational:
// all T indexes of pixel raddr.
module pool_index_buffer #(
  parameter int unsigned T     = 16,
  parameter int unsigned P     = 4,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     wr_all,
  input  logic                     wr_lane,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [$clog2(T/P > 1 ? T/P : 2)-1:0] wlane,
  input  logic [1:0]               wdata_all  [T],
  input  logic [1:0]               wdata_lane [P],
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [1:0]               rdata [T]
);
  logic [1:0] mem [DEPTH][T];

  always_ff @(posedge clk) begin
    if (wr_all) mem[waddr] <= wdata_all;
    else if (wr_lane)
      for (int j = 0; j < P; j++) mem[waddr][int'(wlane) * P + j] <= wdata_lane[j];
  end

  assign rdata = mem[raddr];
endmodule
