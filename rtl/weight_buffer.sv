// weight_buffer -- on-chip store of the weight tiles kept for reuse, and the
// gradient accumulator of WU.
//
// Each word holds one kernel position (kr,kc) of a TM x TN weight tile, so
// the Conv kernel gets all TM*TN weights it needs in one read. The buffer
// holds up to DEPTH such words: M_on/TM x N/TN tiles of K*K words, which is
// what lets a layer reuse its weights for every image of the mini-batch and
// every row block (weights are loaded only for the first row of the first
// image).
//
// Load port: P consecutive weights of one tile in DRAM order (element index
// ld_elem = too*TN + tii of the first one) are written into word ld_addr.
// With ld_transpose the tile is stored transposed (element tii*TM + too),
// which with the flipped word address supplied by the controller gives the
// transposed, flipped kernels W' that BP needs. The text says the flip "can
// be processed on the FPGA chip"; doing it on the load path is this design's
// choice.
// Read port: the whole word raddr, one cycle after re.
// Gradient port (WU): word acc_addr becomes acc_data (acc_first) or the sum
// with what it holds, element by element, in one cycle.
// Update read port: the P elements upd_elem.. of word upd_addr,
// combinationally, for the weight-update step that streams the old weights.
module weight_buffer
  import fp32_pkg::*;
#(
  parameter int unsigned TM    = 16,
  parameter int unsigned TN    = 16,
  parameter int unsigned P     = 4,
  parameter int unsigned DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       ld_en,
  input  logic                       ld_transpose,
  input  logic [$clog2(DEPTH)-1:0]   ld_addr,
  input  logic [$clog2(TM*TN)-1:0]   ld_elem,
  input  fp32_t                      ld_data [P],
  input  logic                       re,
  input  logic [$clog2(DEPTH)-1:0]   raddr,
  output fp32_t                      rdata [TM][TN],
  input  logic                       acc_en,
  input  logic                       acc_first,
  input  logic [$clog2(DEPTH)-1:0]   acc_addr,
  input  fp32_t                      acc_data [TM][TN],
  input  logic [$clog2(DEPTH)-1:0]   upd_addr,
  input  logic [$clog2(TM*TN)-1:0]   upd_elem,
  output fp32_t                      upd_data [P]
);
  fp32_t mem [DEPTH][TM][TN];

  always_ff @(posedge clk) begin
    if (acc_en) begin
      for (int m = 0; m < TM; m++)
        for (int n = 0; n < TN; n++)
          mem[acc_addr][m][n] <= acc_first ? acc_data[m][n]
                                           : fp_add(mem[acc_addr][m][n], acc_data[m][n]);
    end else if (ld_en) begin
      for (int j = 0; j < P; j++) begin
        int e, too, tii;
        e   = int'(ld_elem) + j;
        too = e / TN;
        tii = e % TN;
        if (ld_transpose) mem[ld_addr][tii][too] <= ld_data[j];
        else              mem[ld_addr][too][tii] <= ld_data[j];
      end
    end
    if (re) rdata <= mem[raddr];
  end

  always_comb begin
    for (int j = 0; j < P; j++) begin
      int e;
      e = int'(upd_elem) + j;
      upd_data[j] = mem[upd_addr][e / TN][e % TN];
    end
  end

  initial assert (TM == TN) else $error("the reshaped layout needs TM == TN");
endmodule
