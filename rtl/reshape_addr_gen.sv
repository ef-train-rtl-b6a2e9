// reshape_addr_gen -- DRAM burst of every tile under the reshaped layout.
//
// The data-reshaping approach places every tensor so that a tile is one
// contiguous burst:
//   * feature maps: per image, groups of T channels (T = TM = TN); inside a
//     group the data is row-major over (row, column) with the T channels of
//     a pixel adjacent ("row-column-channel"). With Tc = C a tile of Tr rows
//     is one burst of T*Tr*C words, and the tiles of consecutive row blocks
//     follow each other.
//       addr(b, ch, y, x) = base + b*CH*H*W + (ch/T)*T*H*W + (y*W + x)*T + ch%T
//   * weights: tile by tile, tile (to, ti) at index (to/T)*(N/T) + ti/T, each
//     tile T*T*K*K words ordered (kr, kc, too, tii). FP and WU read the tiles
//     of a layer in storage order (one long burst); BP reads the tile of the
//     transposed layer, tile (ti, to) of the stored one, one tile per burst.
// The paper gives the layout (row-column-channel inside groups of Tm
// channels, tile-by-tile weights, Tm = Tn, Tc = C) and has the host compute
// the per-layer start addresses; the order inside a weight tile and the
// formulas below, which give the per-tile offsets on chip, are this design's.
//
// Interface (combinational): kind selects which tensor is addressed; b, to_t,
// ti_t are the image, output-tile and input-tile indices, row0 the first
// output row of the tile. Feature-map tiles carry their halo rows: an input
// tile of trows output rows spans (trows-1)*S+K padded input rows.
module reshape_addr_gen
  import ef_pkg::*;
#(
  parameter int unsigned T = 16
) (
  input  layer_cfg_t       cfg,
  input  addr_kind_e       kind,
  input  logic [DIM_W-1:0] b,
  input  logic [DIM_W-1:0] to_t,
  input  logic [DIM_W-1:0] ti_t,
  input  logic [DIM_W-1:0] row0,
  output dma_cmd_t         cmd
);
  logic [ADDR_W-1:0] rin, cin, trows, trin, kk, tile_w, wtile;

  always_comb begin
    cin    = (ADDR_W'(cfg.c) - 1) * ADDR_W'(cfg.s) + ADDR_W'(cfg.k);
    rin    = (ADDR_W'(cfg.r) - 1) * ADDR_W'(cfg.s) + ADDR_W'(cfg.k);
    trows  = (ADDR_W'(cfg.r) - ADDR_W'(row0) < ADDR_W'(cfg.tr))
             ? ADDR_W'(cfg.r) - ADDR_W'(row0) : ADDR_W'(cfg.tr);
    trin   = (trows - 1) * ADDR_W'(cfg.s) + ADDR_W'(cfg.k);
    kk     = ADDR_W'(cfg.k) * ADDR_W'(cfg.k);
    tile_w = ADDR_W'(T * T) * kk;
    wtile  = '0;
    cmd    = '0;
    unique case (kind)
      AK_IFM: begin
        cmd.addr = cfg.ifm_base
                 + ADDR_W'(b) * ADDR_W'(cfg.n) * rin * cin
                 + ADDR_W'(ti_t) * ADDR_W'(T) * rin * cin
                 + ADDR_W'(row0) * ADDR_W'(cfg.s) * cin * ADDR_W'(T);
        cmd.len  = ADDR_W'(T) * trin * cin;
      end
      AK_OUT, AK_OFM: begin
        cmd.addr = ((kind == AK_OUT) ? cfg.out_base : cfg.ofm_base)
                 + ADDR_W'(b) * ADDR_W'(cfg.m) * ADDR_W'(cfg.r) * ADDR_W'(cfg.c)
                 + ADDR_W'(to_t) * ADDR_W'(T) * ADDR_W'(cfg.r) * ADDR_W'(cfg.c)
                 + ADDR_W'(row0) * ADDR_W'(cfg.c) * ADDR_W'(T);
        cmd.len  = ADDR_W'(T) * trows * ADDR_W'(cfg.c);
      end
      AK_WEI, AK_WEI_OUT: begin
        wtile    = ADDR_W'(to_t) * (ADDR_W'(cfg.n) / ADDR_W'(T)) + ADDR_W'(ti_t);
        cmd.addr = ((kind == AK_WEI) ? cfg.wei_base : cfg.out_base) + wtile * tile_w;
        cmd.len  = tile_w;
      end
      AK_WEI_T: begin
        // the stored layer has cfg.m input and cfg.n output channels
        wtile    = ADDR_W'(ti_t) * (ADDR_W'(cfg.m) / ADDR_W'(T)) + ADDR_W'(to_t);
        cmd.addr = cfg.wei_base + wtile * tile_w;
        cmd.len  = tile_w;
      end
      default: cmd = '0;
    endcase
  end
endmodule
