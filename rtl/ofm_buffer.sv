// ofm_buffer -- on-chip buffer for one tile of output features.
//
// TM banks, one per output channel of the tile, each holding Tr x C values.
// In FP and BP it is the accumulator of the tiled loop: the partial sums of
// every input-channel tile are added to it (acc port), the first input tile
// overwriting instead of adding. In WU it holds a tile of loss loaded from
// the OFM DMA channel (load port) that the Conv kernel reads.
//
// acc port: in one cycle, mem[acc_addr] becomes acc_data (acc_first) or
// mem[acc_addr] + acc_data, for all TM banks; the read is combinational so a
// back-to-back update of the same address sees the new value.
// load port: P words of pixel waddr, channels wlane*P .. wlane*P+P-1.
// read port: TM values of pixel raddr, combinationally, so the store path
// can send one stream beat per cycle without a prefetch stage.
// Depth is this design's choice (the paper's resource model, B_OFM, sizes it
// per device).
module ofm_buffer
  import fp32_pkg::*;
#(
  parameter int unsigned TM    = 16,
  parameter int unsigned P     = 4,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     acc_en,
  input  logic                     acc_first,
  input  logic [$clog2(DEPTH)-1:0] acc_addr,
  input  fp32_t                    acc_data [TM],
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [$clog2(TM/P > 1 ? TM/P : 2)-1:0] wlane,
  input  fp32_t                    wdata [P],
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output fp32_t                    rdata [TM]
);
  fp32_t mem [TM][DEPTH];

  always_ff @(posedge clk) begin
    if (acc_en) begin
      for (int m = 0; m < TM; m++)
        mem[m][acc_addr] <= acc_first ? acc_data[m]
                                      : fp_add(mem[m][acc_addr], acc_data[m]);
    end else if (we) begin
      for (int j = 0; j < P; j++)
        mem[int'(wlane) * P + j][waddr] <= wdata[j];
    end
  end

  always_comb
    for (int m = 0; m < TM; m++) rdata[m] = mem[m][raddr];

  initial assert (TM % P == 0) else $error("TM must be a multiple of P");
endmodule
