// ifm_buffer -- on-chip buffer for one tile of input features.
//
// The tile holds TN input channels of (Tr-1)*S+K rows of a full padded input
// row each, i.e. the reshaped DRAM order pixel by pixel with TN channels per
// pixel. The buffer is split into TN banks, one per input channel, so the
// Conv kernel can read all TN channels of one pixel in the same cycle.
//
// Write port: the IFM DMA stream delivers P words per beat; wlane selects
// which group of P channels (banks wlane*P .. wlane*P+P-1) of pixel waddr
// the beat fills. Read port: rdata is the TN channels of pixel raddr, one
// cycle after re (registered read, as a block RAM gives it).
// The bank split is the natural one for channel-level parallelism; the depth
// is this design's choice (the paper sizes it per device with its resource
// model, Eq. for B_IFM).
module ifm_buffer
  import fp32_pkg::*;
#(
  parameter int unsigned TN    = 16,
  parameter int unsigned P     = 4,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [$clog2(TN/P > 1 ? TN/P : 2)-1:0] wlane,
  input  fp32_t                    wdata [P],
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output fp32_t                    rdata [TN]
);
  fp32_t mem [TN][DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      for (int j = 0; j < P; j++)
        mem[int'(wlane) * P + j][waddr] <= wdata[j];
    if (re)
      for (int n = 0; n < TN; n++)
        rdata[n] <= mem[n][raddr];
  end

  initial assert (TN % P == 0) else $error("TN must be a multiple of P");
endmodule
