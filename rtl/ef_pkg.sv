// ef_pkg -- sizes, operation codes and the layer descriptor of the training
// accelerator.
//
// The accelerator is built around channel-level parallelism: TM output
// channels and TN input channels are processed per cycle, and the reshaped
// DRAM layout requires TM == TN. The defaults are the ZCU102 configuration
// (5 DSPs per MAC, 1280 DSPs for the Conv kernel, so TM = TN = 16) with a
// 128-bit DMA stream, i.e. P = 4 single-precision words per beat.
//
// A layer is described to the accelerator by layer_cfg_t. In the paper the
// host computes the layer parameters, tiling factors (Tr, M_on) and the DMA
// start addresses offline; here they arrive as one descriptor per layer.
package ef_pkg;
  import fp32_pkg::*;

  localparam int unsigned TM_DEF = 16;  // output channels per tile
  localparam int unsigned TN_DEF = 16;  // input channels per tile (= TM)
  localparam int unsigned P_DEF  = 4;   // fp32 words per 128-bit stream beat

  localparam int unsigned DIM_W  = 16;  // width of a layer dimension field
  localparam int unsigned ADDR_W = 32;  // DRAM word address width
  localparam int unsigned LEN_W  = 32;  // burst length (words) width

  typedef enum logic [2:0] {
    OP_CONV_FP = 3'd0,   // forward convolution          (Eq. 1)
    OP_CONV_BP = 3'd1,   // loss propagation             (Eq. 2, 3)
    OP_CONV_WU = 3'd2,   // weight gradient and update   (Eq. 4)
    OP_POOL_FP = 3'd3,   // 2x2 pooling, forward
    OP_POOL_BP = 3'd4,   // 2x2 pooling, backward        (Eq. 5)
    OP_BN_FP   = 3'd5,   // batch normalization forward  (Eq. 7-12)
    OP_BN_BP   = 3'd6    // batch normalization backward (Eq. 13-15)
  } op_e;

  // Layer descriptor. Channel counts are multiples of TM (layers with fewer
  // channels are zero-padded in DRAM). R, C are the output feature map rows
  // and columns; the input map of a Conv layer is stored already padded, with
  // (R-1)*S+K rows and (C-1)*S+K columns.
  typedef struct packed {
    op_e              op;
    logic [DIM_W-1:0] m;        // output channels (Conv), channels (Pool, BN)
    logic [DIM_W-1:0] n;        // input channels (Conv)
    logic [DIM_W-1:0] r;        // output rows
    logic [DIM_W-1:0] c;        // output columns (= Tc, a full row)
    logic [3:0]       k;        // kernel size
    logic [2:0]       s;        // stride
    logic [DIM_W-1:0] tr;       // output rows per tile
    logic [DIM_W-1:0] m_on;     // output channels whose weights stay on chip
    logic [DIM_W-1:0] b;        // images in the mini-batch
    logic             relu;     // a ReLU follows (FP) / precedes (BP) the layer
    logic             pool_avg; // pooling: 1 = average, 0 = maximum
    fp32_t            lr;       // learning rate for the weight update
    logic [ADDR_W-1:0] ifm_base; // base of the data read on the IFM channel
    logic [ADDR_W-1:0] ofm_base; // base of the data read on the OFM channel
    logic [ADDR_W-1:0] wei_base; // base of the data read on the WEI channel
    logic [ADDR_W-1:0] out_base; // base of the data written on the OUT channel
    logic [ADDR_W-1:0] aux_base; // second output region (BN: A-hat; WU: weights out, pool: indexes)
  } layer_cfg_t;

  // which tensor an address-generator request refers to
  typedef enum logic [2:0] {
    AK_IFM     = 3'd0,  // input-feature tile read, ifm_base
    AK_OUT     = 3'd1,  // output-feature tile written, out_base
    AK_OFM     = 3'd2,  // output-shaped tile read on the OFM channel, ofm_base
    AK_WEI     = 3'd3,  // weight tile as stored, wei_base
    AK_WEI_T   = 3'd4,  // weight tile of the transposed layer (BP), wei_base
    AK_WEI_OUT = 3'd5   // updated weight tile written, out_base
  } addr_kind_e;

  // one DMA burst request: start word address and length in words
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;
  } dma_cmd_t;

endpackage
