// pool_kernel -- 2x2 / stride-2 pooling layer, forward and backward.
//
// FP: for every image, group of T channels and output row, the two input rows
// (2*W pixels, reshaped layout, one burst) are loaded from the IFM channel
// into a row buffer. Each output pixel reads its four inputs (window
// positions k = 0..3 in row-major order) and keeps, per channel, the maximum
// and its 2-bit index (maximum pooling) or the sum times 0.25 (average
// pooling). The output row goes out on the OUT channel; afterwards, for
// maximum pooling, the row's indexes go out too (one 32-bit word per index,
// value 0..3, at aux_base in the output layout).
// BP: the loss row of the pooled layer comes on the IFM channel and its
// indexes on the WEI channel; the two input rows are streamed out, each
// position k receiving the loss if its index is k (maximum, Eq. 5) or a
// quarter of it (average pooling).
//
// The 2x2 window follows from the paper's 2-bit index; the DRAM word format
// of the indexes, the row-at-a-time schedule, and that the results stream out
// directly instead of through the IFM buffer are this design's choices.
// Interface: start/cfg/done like the Conv engine; cfg.r, cfg.c are the
// pooled (output) rows and columns, cfg.m the channels; the same DMA command
// and stream ports as conv_engine (the OFM channel is not used).
module pool_kernel
  import fp32_pkg::*;
  import ef_pkg::*;
#(
  parameter int unsigned T         = 16,
  parameter int unsigned P         = 4,
  parameter int unsigned ROW_DEPTH = 1024   // pixels of two input rows
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       done,
  output logic       ifm_cmd_valid,
  output dma_cmd_t   ifm_cmd,
  input  logic       ifm_cmd_ready,
  input  logic       ifm_valid,
  input  fp32_t      ifm_data [P],
  output logic       ifm_ready,
  output logic       wei_cmd_valid,
  output dma_cmd_t   wei_cmd,
  input  logic       wei_cmd_ready,
  input  logic       wei_valid,
  input  fp32_t      wei_data [P],
  output logic       wei_ready,
  output logic       out_cmd_valid,
  output dma_cmd_t   out_cmd,
  input  logic       out_cmd_ready,
  output logic       out_valid,
  output fp32_t      out_data [P],
  input  logic       out_ready
);
  localparam int unsigned LPB = T / P;
  localparam int unsigned AW  = $clog2(ROW_DEPTH);
  localparam int unsigned LW  = $clog2(LPB > 1 ? LPB : 2);
  localparam fp32_t       QUARTER = 32'h3e80_0000;

  typedef enum logic [3:0] {
    S_IDLE, S_ROW, S_LCMD, S_LOAD, S_XCMD, S_XLOAD, S_OCMD, S_RD, S_EMIT,
    S_ICMD, S_IEMIT, S_NEXT, S_DONE
  } state_e;

  state_e      st;
  layer_cfg_t  c;
  logic        bp;
  logic [31:0] bimg, grp, row, pix, k, beat, beats_total;
  logic [31:0] h, w, rc, hw;

  fp32_t       rb_rd [T];
  logic        rb_re;
  logic [AW-1:0] rb_raddr;
  fp32_t       acc   [T];
  logic [1:0]  idx   [T];
  logic [1:0]  ib_rd [T];
  logic [1:0]  ib_wl [P];

  always_comb begin
    h  = 32'(c.r) * 2;
    w  = 32'(c.c) * 2;
    rc = 32'(c.r) * 32'(c.c);
    hw = h * w;
  end

  ifm_buffer #(.TN(T), .P(P), .DEPTH(ROW_DEPTH)) u_rows (
    .clk, .we(st == S_LOAD && ifm_valid), .waddr(AW'(beat / LPB)),
    .wlane(LW'(beat % LPB)), .wdata(ifm_data), .re(rb_re), .raddr(rb_raddr),
    .rdata(rb_rd));

  always_comb for (int j = 0; j < P; j++) ib_wl[j] = wei_data[j][1:0];

  pool_index_buffer #(.T(T), .P(P), .DEPTH(ROW_DEPTH)) u_idx (
    .clk, .wr_all(st == S_EMIT && beat == 0 && !bp && !c.pool_avg),
    .wr_lane(st == S_XLOAD && wei_valid), .waddr(st == S_XLOAD ? AW'(beat / LPB) : AW'(pix)),
    .wlane(LW'(beat % LPB)), .wdata_all(idx), .wdata_lane(ib_wl),
    .raddr(st == S_IEMIT ? AW'(beat / LPB) : (bp ? AW'(pix % w / 2) : AW'(pix))),
    .rdata(ib_rd));

  // row-buffer read address: FP window input k of output pixel pix; BP the
  // loss of the output pixel under input pixel pix
  always_comb begin
    rb_re    = (st == S_RD);
    rb_raddr = bp ? AW'((pix % w) / 2)
                  : AW'((k / 2) * w + pix * 2 + (k % 2));
  end

  // command generation
  always_comb begin
    ifm_cmd = '0; wei_cmd = '0; out_cmd = '0;
    if (!bp) begin
      ifm_cmd.addr = c.ifm_base + bimg * 32'(c.m) * hw + grp * T * hw + row * 2 * w * T;
      ifm_cmd.len  = 2 * w * T;
      out_cmd.addr = ((st == S_ICMD) ? c.aux_base : c.out_base)
                   + bimg * 32'(c.m) * rc + grp * T * rc + row * 32'(c.c) * T;
      out_cmd.len  = 32'(c.c) * T;
    end else begin
      ifm_cmd.addr = c.ifm_base + bimg * 32'(c.m) * rc + grp * T * rc + row * 32'(c.c) * T;
      ifm_cmd.len  = 32'(c.c) * T;
      wei_cmd.addr = c.wei_base + bimg * 32'(c.m) * rc + grp * T * rc + row * 32'(c.c) * T;
      wei_cmd.len  = 32'(c.c) * T;
      out_cmd.addr = c.out_base + bimg * 32'(c.m) * hw + grp * T * hw + row * 2 * w * T;
      out_cmd.len  = 2 * w * T;
    end
    ifm_cmd_valid = (st == S_LCMD);
    wei_cmd_valid = (st == S_XCMD);
    out_cmd_valid = (st == S_OCMD) || (st == S_ICMD);
    ifm_ready     = (st == S_LOAD);
    wei_ready     = (st == S_XLOAD);
  end

  // output data
  logic [31:0] kin;   // BP: window position of input pixel pix
  assign kin = ((pix / w) % 2) * 2 + (pix % 2);
  always_comb begin
    out_valid = (st == S_EMIT) || (st == S_IEMIT);
    for (int j = 0; j < P; j++) begin
      int ch;
      ch = int'(beat % LPB) * P + j;
      if (st == S_IEMIT)  out_data[j] = {30'd0, ib_rd[ch]};
      else if (!bp)       out_data[j] = acc[ch];
      else if (c.pool_avg) out_data[j] = acc[ch];
      else                out_data[j] = (32'(ib_rd[ch]) == kin) ? acc[ch] : FP_ZERO;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; bp <= 1'b0; done <= 1'b0;
      bimg <= '0; grp <= '0; row <= '0; pix <= '0; k <= '0;
      beat <= '0; beats_total <= '0;
      for (int i = 0; i < T; i++) begin acc[i] <= FP_ZERO; idx[i] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          c <= cfg; bp <= (cfg.op == OP_POOL_BP);
          bimg <= '0; grp <= '0; row <= '0;
          st <= S_ROW;
        end
        S_ROW: st <= S_LCMD;
        S_LCMD: if (ifm_cmd_ready) begin
          beat <= '0; beats_total <= (bp ? 32'(c.c) : 2 * w) * LPB; st <= S_LOAD;
        end
        S_LOAD: if (ifm_valid) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) st <= (bp && !c.pool_avg) ? S_XCMD : S_OCMD;
        end
        S_XCMD: if (wei_cmd_ready) begin
          beat <= '0; beats_total <= 32'(c.c) * LPB; st <= S_XLOAD;
        end
        S_XLOAD: if (wei_valid) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) st <= S_OCMD;
        end
        S_OCMD: if (out_cmd_ready) begin pix <= '0; k <= '0; st <= S_RD; end
        S_RD: begin
          // FP: reads k = 0..3 issued, data of read k-1 folded in at k
          // BP: one read (k = 0), data taken at k = 1
          k <= k + 1;
          if (!bp) begin
            if (k >= 1) begin
              for (int i = 0; i < T; i++) begin
                if (c.pool_avg) begin
                  acc[i] <= (k == 1) ? fp_mul(rb_rd[i], QUARTER)
                                     : fp_add(acc[i], fp_mul(rb_rd[i], QUARTER));
                end else if (k == 1 || fp_gt(rb_rd[i], acc[i])) begin
                  acc[i] <= rb_rd[i];
                  idx[i] <= 2'(k - 1);
                end
              end
            end
            if (k == 4) begin beat <= '0; st <= S_EMIT; end
          end else begin
            if (k == 1) begin
              for (int i = 0; i < T; i++)
                acc[i] <= c.pool_avg ? fp_mul(rb_rd[i], QUARTER) : rb_rd[i];
              beat <= '0;
              st   <= S_EMIT;
            end
          end
        end
        S_EMIT: if (out_ready) begin
          beat <= beat + 1;
          if (beat == LPB - 1) begin
            k <= '0;
            if (pix == (bp ? 2 * w : 32'(c.c)) - 1)
              st <= (!bp && !c.pool_avg) ? S_ICMD : S_NEXT;
            else begin
              pix <= pix + 1;
              st  <= S_RD;
            end
          end
        end
        S_ICMD: if (out_cmd_ready) begin
          beat <= '0; beats_total <= 32'(c.c) * LPB; st <= S_IEMIT;
        end
        S_IEMIT: if (out_ready) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) st <= S_NEXT;
        end
        S_NEXT: begin
          st <= S_ROW;
          if (row + 1 != 32'(c.r)) row <= row + 1;
          else begin
            row <= '0;
            if (grp + 1 != 32'(c.m) / T) grp <= grp + 1;
            else begin
              grp <= '0;
              if (bimg + 1 != 32'(c.b)) bimg <= bimg + 1;
              else st <= S_DONE;
            end
          end
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
