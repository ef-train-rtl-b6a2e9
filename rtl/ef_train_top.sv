// ef_train_top -- the EF-Train accelerator: a unified channel-level parallel
// Conv engine (FP, BP and WU), a pooling kernel and a batch-normalization
// kernel behind four DMA channels.
//
// The host starts one layer at a time: it presents a layer_cfg_t on cfg and
// pulses start; cfg.op selects the kernel (OP_CONV_* -> conv_engine,
// OP_POOL_* -> pool_kernel, OP_BN_* -> bn_kernel). The selected kernel owns
// the DMA channels until it pulses done; busy is high in between. The
// channels are the paper's four: three read channels rd_*[0] = IFM,
// rd_*[1] = OFM, rd_*[2] = WEI, and the write channel wr_* = OUT. Each has a
// command port (valid/ready, dma_cmd_t = word address + word count) and a
// stream of P 32-bit words per beat (valid/ready). The DRAM, the DMA
// engines and the ARM host are outside this design.
//
// From the paper: the kernel split, the four channels, one layer in flight,
// the op codes following the three training processes (FP, BP, WU). This
// design's choices: the start/done handshake and the channel arbitration by
// the latched op (the kernels never run concurrently).
module ef_train_top
  import fp32_pkg::*;
  import ef_pkg::*;
#(
  parameter int unsigned T         = 16,
  parameter int unsigned P         = 4,
  parameter int unsigned IFM_DEPTH = 4096,
  parameter int unsigned OFM_DEPTH = 2048,
  parameter int unsigned WEI_DEPTH = 512,
  parameter int unsigned POOL_ROW  = 1024,
  parameter int unsigned BN_MAXM   = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done,
  output logic       rd_cmd_valid [3],
  output dma_cmd_t   rd_cmd       [3],
  input  logic       rd_cmd_ready [3],
  input  logic       rd_valid     [3],
  input  fp32_t      rd_data      [3][P],
  output logic       rd_ready     [3],
  output logic       wr_cmd_valid,
  output dma_cmd_t   wr_cmd,
  input  logic       wr_cmd_ready,
  output logic       wr_valid,
  output fp32_t      wr_data [P],
  input  logic       wr_ready,
  output logic       conv_kernel_busy   // Conv kernel computing (for profiling)
);
  typedef enum logic [1:0] { K_CONV, K_POOL, K_BN } kern_e;

  kern_e sel, sel_now;
  logic  running;

  always_comb begin
    unique case (cfg.op)
      OP_POOL_FP, OP_POOL_BP: sel_now = K_POOL;
      OP_BN_FP, OP_BN_BP:     sel_now = K_BN;
      default:                sel_now = K_CONV;
    endcase
  end

  logic go;
  assign go = start && !running;

  // per-kernel channel signals, index 0 conv, 1 pool, 2 bn
  logic     k_done [3];
  logic     k_rcv [3][3], k_rr [3][3];
  dma_cmd_t k_rc  [3][3];
  logic     k_wcv [3], k_wv [3];
  dma_cmd_t k_wc  [3];
  fp32_t    k_wd  [3][P];

  conv_engine #(.T(T), .P(P), .IFM_DEPTH(IFM_DEPTH), .OFM_DEPTH(OFM_DEPTH),
                .WEI_DEPTH(WEI_DEPTH)) u_conv (
    .clk, .rst_n, .start(go && sel_now == K_CONV), .cfg, .busy(), .done(k_done[0]),
    .ifm_cmd_valid(k_rcv[0][0]), .ifm_cmd(k_rc[0][0]), .ifm_cmd_ready(rd_cmd_ready[0]),
    .ifm_valid(rd_valid[0] && sel == K_CONV), .ifm_data(rd_data[0]), .ifm_ready(k_rr[0][0]),
    .ofm_cmd_valid(k_rcv[0][1]), .ofm_cmd(k_rc[0][1]), .ofm_cmd_ready(rd_cmd_ready[1]),
    .ofm_valid(rd_valid[1] && sel == K_CONV), .ofm_data(rd_data[1]), .ofm_ready(k_rr[0][1]),
    .wei_cmd_valid(k_rcv[0][2]), .wei_cmd(k_rc[0][2]), .wei_cmd_ready(rd_cmd_ready[2]),
    .wei_valid(rd_valid[2] && sel == K_CONV), .wei_data(rd_data[2]), .wei_ready(k_rr[0][2]),
    .out_cmd_valid(k_wcv[0]), .out_cmd(k_wc[0]), .out_cmd_ready(wr_cmd_ready),
    .out_valid(k_wv[0]), .out_data(k_wd[0]), .out_ready(wr_ready && sel == K_CONV),
    .kernel_busy(conv_kernel_busy));

  pool_kernel #(.T(T), .P(P), .ROW_DEPTH(POOL_ROW)) u_pool (
    .clk, .rst_n, .start(go && sel_now == K_POOL), .cfg, .done(k_done[1]),
    .ifm_cmd_valid(k_rcv[1][0]), .ifm_cmd(k_rc[1][0]), .ifm_cmd_ready(rd_cmd_ready[0]),
    .ifm_valid(rd_valid[0] && sel == K_POOL), .ifm_data(rd_data[0]), .ifm_ready(k_rr[1][0]),
    .wei_cmd_valid(k_rcv[1][2]), .wei_cmd(k_rc[1][2]), .wei_cmd_ready(rd_cmd_ready[2]),
    .wei_valid(rd_valid[2] && sel == K_POOL), .wei_data(rd_data[2]), .wei_ready(k_rr[1][2]),
    .out_cmd_valid(k_wcv[1]), .out_cmd(k_wc[1]), .out_cmd_ready(wr_cmd_ready),
    .out_valid(k_wv[1]), .out_data(k_wd[1]), .out_ready(wr_ready && sel == K_POOL));
  assign k_rcv[1][1] = 1'b0;
  assign k_rc[1][1]  = '0;
  assign k_rr[1][1]  = 1'b0;

  bn_kernel #(.T(T), .P(P), .MAXM(BN_MAXM)) u_bn (
    .clk, .rst_n, .start(go && sel_now == K_BN), .cfg, .done(k_done[2]),
    .ifm_cmd_valid(k_rcv[2][0]), .ifm_cmd(k_rc[2][0]), .ifm_cmd_ready(rd_cmd_ready[0]),
    .ifm_valid(rd_valid[0] && sel == K_BN), .ifm_data(rd_data[0]), .ifm_ready(k_rr[2][0]),
    .ofm_cmd_valid(k_rcv[2][1]), .ofm_cmd(k_rc[2][1]), .ofm_cmd_ready(rd_cmd_ready[1]),
    .ofm_valid(rd_valid[1] && sel == K_BN), .ofm_data(rd_data[1]), .ofm_ready(k_rr[2][1]),
    .wei_cmd_valid(k_rcv[2][2]), .wei_cmd(k_rc[2][2]), .wei_cmd_ready(rd_cmd_ready[2]),
    .wei_valid(rd_valid[2] && sel == K_BN), .wei_data(rd_data[2]), .wei_ready(k_rr[2][2]),
    .out_cmd_valid(k_wcv[2]), .out_cmd(k_wc[2]), .out_cmd_ready(wr_cmd_ready),
    .out_valid(k_wv[2]), .out_data(k_wd[2]), .out_ready(wr_ready && sel == K_BN));

  // channel mux: only the running kernel drives the channels
  always_comb begin
    for (int ch = 0; ch < 3; ch++) begin
      rd_cmd_valid[ch] = running && k_rcv[sel][ch];
      rd_cmd[ch]       = k_rc[sel][ch];
      rd_ready[ch]     = running && k_rr[sel][ch];
    end
    wr_cmd_valid = running && k_wcv[sel];
    wr_cmd       = k_wc[sel];
    wr_valid     = running && k_wv[sel];
    wr_data      = k_wd[sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel <= K_CONV; running <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (go) begin
        sel <= sel_now; running <= 1'b1;
      end else if (running && k_done[sel]) begin
        running <= 1'b0; done <= 1'b1;
      end
    end
  end
  assign busy = running;

  // a kernel only ever finishes while it is the selected, running one
  a_done_sel: assert property (@(posedge clk)
    (k_done[0] || k_done[1] || k_done[2]) |-> (running && k_done[sel]))
    else $error("ef_train_top: done from a kernel that is not running");
endmodule
