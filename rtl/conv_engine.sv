// conv_engine -- tiled convolution for forward (FP), backward (BP) and
// weight-update (WU) passes on the unified Conv kernel.
//
// The engine walks the tile loops of the reshaped schedule, asks the DMA for
// every tile burst (one reshape_addr_gen per channel computes address and
// length), fills the on-chip buffers from the streams, runs the Conv kernel
// over the tile and streams the results out.
//
// FP / BP (loop order with weight reuse):
//   for each group of M_on output channels
//     for each image b
//       for each output tile to in the group
//         for each row block row0 (Tr rows, full rows: Tc = C)
//           for each input tile ti: load IFM tile;
//                                   if (b == 0 && row0 == 0) load WEI tile;
//                                   convolve (OFM += W * IFM)
//           store OFM tile (OUT channel)
//   Weights are fetched only for the first row block of the first image and
//   then reused from the Weight buffer, which holds M_on x N kernels. In BP
//   the weight tile of the transposed layer is fetched and stored transposed
//   and flipped. A ReLU after the layer is applied on the store path (FP:
//   negative values become 0); a ReLU before the layer in BP masks the loss
//   with the activation, which arrives on the OFM channel during the store.
// WU:
//   for each group, for each image, for each output tile, for each input
//   tile, for each row block: load loss tile (OFM channel), load activation
//   tile (IFM channel), accumulate dW += L * A into the Weight buffer.
//   After the last image, each weight tile of the group is streamed in (WEI),
//   updated as W - lr*dW and streamed out (OUT).
// On-chip compute order inside a tile follows the paper's pseudo-code: FP/BP
// kr, kc, row, column; WU row, column, kr, kc. One kernel issue per cycle, so
// a tile takes trows * C * K * K compute cycles plus a 3-cycle drain.
//
// This design's own choices: load, compute and store of a tile run one after
// the other (the paper overlaps them with double buffers, which are not
// built here); input maps are stored pre-padded; BP is for stride-1 layers
// (a strided layer's loss would need zero insertion, which the text does not
// describe); cfg.m, cfg.n are multiples of TM; and
// (M_on/TM)*(N/TN)*K*K must fit WEI_DEPTH.
//
// Interface: start with a valid cfg begins the layer, done pulses at the
// end. Each DMA channel has a command handshake (cmd_valid/cmd_ready with a
// dma_cmd_t) and a data stream (valid/ready, P words per beat). kernel_busy
// is high in every cycle the Conv kernel is issued (for cycle accounting).
module conv_engine
  import fp32_pkg::*;
  import ef_pkg::*;
#(
  parameter int unsigned T         = 16,    // TM = TN
  parameter int unsigned P         = 4,
  parameter int unsigned IFM_DEPTH = 4096,
  parameter int unsigned OFM_DEPTH = 2048,
  parameter int unsigned WEI_DEPTH = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done,
  // IFM channel
  output logic       ifm_cmd_valid,
  output dma_cmd_t   ifm_cmd,
  input  logic       ifm_cmd_ready,
  input  logic       ifm_valid,
  input  fp32_t      ifm_data [P],
  output logic       ifm_ready,
  // OFM channel
  output logic       ofm_cmd_valid,
  output dma_cmd_t   ofm_cmd,
  input  logic       ofm_cmd_ready,
  input  logic       ofm_valid,
  input  fp32_t      ofm_data [P],
  output logic       ofm_ready,
  // WEI channel
  output logic       wei_cmd_valid,
  output dma_cmd_t   wei_cmd,
  input  logic       wei_cmd_ready,
  input  logic       wei_valid,
  input  fp32_t      wei_data [P],
  output logic       wei_ready,
  // OUT channel
  output logic       out_cmd_valid,
  output dma_cmd_t   out_cmd,
  input  logic       out_cmd_ready,
  output logic       out_valid,
  output fp32_t      out_data [P],
  input  logic       out_ready,
  output logic       kernel_busy
);
  localparam int unsigned LPB  = T / P;          // beats per pixel (T channels)
  localparam int unsigned WLPB = T * T / P;      // beats per kernel position
  localparam int unsigned IAW  = $clog2(IFM_DEPTH);
  localparam int unsigned OAW  = $clog2(OFM_DEPTH);
  localparam int unsigned WAW  = $clog2(WEI_DEPTH);
  localparam int unsigned LW   = $clog2(LPB > 1 ? LPB : 2);

  typedef enum logic [4:0] {
    S_IDLE, S_TILE, S_OFM_CMD, S_OFM_LOAD, S_IFM_CMD, S_IFM_LOAD,
    S_WEI_CMD, S_WEI_LOAD, S_COMP, S_DRAIN, S_STORE_CMD, S_STORE,
    S_UPD_CMD, S_UPD, S_DONE
  } state_e;

  state_e     st;
  layer_cfg_t c;
  logic       is_bp, is_wu;

  // loop indices (tile indices for channels)
  logic [31:0] grp, bimg, tot, tit, row0;
  logic [31:0] n_to, n_ti, grp_tiles, grp_start, grp_end;
  logic [31:0] cin, kk, trows, trin;
  // beat / compute counters
  logic [31:0] beat, beats_total;
  logic [31:0] ci, cj, ctr, ctc;       // kr, kc, row, column inside the tile
  logic [1:0]  drain;
  logic        cmd_a_done, cmd_b_done;

  // ---------------------------------------------------------------- datapath
  fp32_t  ifm_rd [T];
  fp32_t  wei_rd [T][T];
  fp32_t  ofm_rd [T];
  fp32_t  ofm_q  [T];
  fp32_t  upd_g  [P];
  fp32_t  ksum   [T];
  fp32_t  kprod  [T][T];
  logic   ksum_v, kprod_v;

  logic            ib_we, ib_re;
  logic [IAW-1:0]  ib_waddr, ib_raddr;
  logic [LW-1:0]   ib_wlane;
  logic            ob_acc, ob_first, ob_we;
  logic [OAW-1:0]  ob_acc_addr, ob_waddr, ob_raddr;
  logic [LW-1:0]   ob_wlane;
  logic            wb_ld, wb_re, wb_acc, wb_first;
  logic [WAW-1:0]  wb_ld_addr, wb_raddr, wb_acc_addr, wb_upd_addr;
  logic [$clog2(T*T)-1:0] wb_ld_elem, wb_upd_elem;

  // issue pipeline: read at t, kernel at t+1, products t+2, sums t+3
  logic            iss, iss_q;
  logic [31:0]     acc_addr_d [3];
  logic            acc_first_d [3];
  logic [31:0]     iss_acc_addr;
  logic            iss_first;

  ifm_buffer #(.TN(T), .P(P), .DEPTH(IFM_DEPTH)) u_ifm (
    .clk, .we(ib_we), .waddr(ib_waddr), .wlane(ib_wlane), .wdata(ifm_data),
    .re(ib_re), .raddr(ib_raddr), .rdata(ifm_rd));

  ofm_buffer #(.TM(T), .P(P), .DEPTH(OFM_DEPTH)) u_ofm (
    .clk, .acc_en(ob_acc), .acc_first(ob_first), .acc_addr(ob_acc_addr),
    .acc_data(ksum), .we(ob_we), .waddr(ob_waddr), .wlane(ob_wlane),
    .wdata(ofm_data), .raddr(ob_raddr), .rdata(ofm_rd));

  weight_buffer #(.TM(T), .TN(T), .P(P), .DEPTH(WEI_DEPTH)) u_wei (
    .clk, .ld_en(wb_ld), .ld_transpose(is_bp), .ld_addr(wb_ld_addr),
    .ld_elem(wb_ld_elem), .ld_data(wei_data), .re(wb_re), .raddr(wb_raddr),
    .rdata(wei_rd), .acc_en(wb_acc), .acc_first(wb_first),
    .acc_addr(wb_acc_addr), .acc_data(kprod), .upd_addr(wb_upd_addr),
    .upd_elem(wb_upd_elem), .upd_data(upd_g));

  conv_kernel #(.TM(T), .TN(T)) u_kernel (
    .clk, .rst_n, .in_valid(iss_q), .wu(is_wu), .ifm(ifm_rd), .wei(wei_rd),
    .ofm(ofm_q), .prod_valid(kprod_v), .sum_valid(ksum_v), .sum(ksum),
    .prod(kprod));

  // address generators, one per DMA channel
  addr_kind_e k_ifm, k_ofm, k_wei, k_out;
  reshape_addr_gen #(.T(T)) u_ag_ifm (.cfg(c), .kind(k_ifm), .b(DIM_W'(bimg)),
    .to_t(DIM_W'(tot)), .ti_t(DIM_W'(tit)), .row0(DIM_W'(row0)), .cmd(ifm_cmd));
  reshape_addr_gen #(.T(T)) u_ag_ofm (.cfg(c), .kind(k_ofm), .b(DIM_W'(bimg)),
    .to_t(DIM_W'(tot)), .ti_t(DIM_W'(tit)), .row0(DIM_W'(row0)), .cmd(ofm_cmd));
  reshape_addr_gen #(.T(T)) u_ag_wei (.cfg(c), .kind(k_wei), .b(DIM_W'(bimg)),
    .to_t(DIM_W'(tot)), .ti_t(DIM_W'(tit)), .row0(DIM_W'(row0)), .cmd(wei_cmd));
  reshape_addr_gen #(.T(T)) u_ag_out (.cfg(c), .kind(k_out), .b(DIM_W'(bimg)),
    .to_t(DIM_W'(tot)), .ti_t(DIM_W'(tit)), .row0(DIM_W'(row0)), .cmd(out_cmd));

  assign k_ifm = AK_IFM;
  assign k_ofm = AK_OFM;
  assign k_wei = is_bp ? AK_WEI_T : AK_WEI;
  assign k_out = (st == S_UPD_CMD || st == S_UPD) ? AK_WEI_OUT : AK_OUT;

  // derived sizes of the current tile
  always_comb begin
    cin       = (32'(c.c) - 1) * 32'(c.s) + 32'(c.k);
    kk        = 32'(c.k) * 32'(c.k);
    trows     = (32'(c.r) - row0 < 32'(c.tr)) ? 32'(c.r) - row0 : 32'(c.tr);
    trin      = (trows - 1) * 32'(c.s) + 32'(c.k);
    n_to      = 32'(c.m) / T;
    n_ti      = 32'(c.n) / T;
    grp_tiles = 32'(c.m_on) / T;
    grp_start = grp * grp_tiles;
    grp_end   = (grp_start + grp_tiles < n_to) ? grp_start + grp_tiles : n_to;
  end

  logic [31:0] slot;
  assign slot = (tot - grp_start) * n_ti + tit;

  // buffer port control
  always_comb begin
    ib_we    = (st == S_IFM_LOAD) && ifm_valid;
    ib_waddr = IAW'(beat / LPB);
    ib_wlane = LW'(beat % LPB);
    ob_we    = (st == S_OFM_LOAD) && ofm_valid;
    ob_waddr = OAW'(beat / LPB);
    ob_wlane = LW'(beat % LPB);
    wb_ld      = (st == S_WEI_LOAD) && wei_valid;
    wb_ld_addr = WAW'(slot * kk + (is_bp ? kk - 1 - beat / WLPB : beat / WLPB));
    wb_ld_elem = ($clog2(T*T))'((beat % WLPB) * P);
    wb_upd_addr = WAW'(slot * kk + beat / WLPB);
    wb_upd_elem = ($clog2(T*T))'((beat % WLPB) * P);

    // compute issue
    iss      = (st == S_COMP);
    ib_re    = iss;
    ib_raddr = IAW'((32'(c.s) * ctr + ci) * cin + 32'(c.s) * ctc + cj);
    wb_re    = iss && !is_wu;
    wb_raddr = WAW'(slot * kk + ci * 32'(c.k) + cj);
    if (is_wu) begin
      iss_acc_addr = slot * kk + ci * 32'(c.k) + cj;
      iss_first    = (bimg == 0) && (row0 == 0) && (ctr == 0) && (ctc == 0);
    end else begin
      iss_acc_addr = ctr * 32'(c.c) + ctc;
      iss_first    = (tit == 0) && (ci == 0) && (cj == 0);
    end
    // OFM buffer read: kernel operand in WU, store data otherwise
    ob_raddr = (st == S_COMP) ? OAW'(ctr * 32'(c.c) + ctc) : OAW'(beat / LPB);

    // accumulation: WU products arrive at t+2, FP/BP sums at t+3
    ob_acc      = ksum_v && !is_wu;
    ob_first    = acc_first_d[2];
    ob_acc_addr = OAW'(acc_addr_d[2]);
    wb_acc      = kprod_v && is_wu;
    wb_first    = acc_first_d[1];
    wb_acc_addr = WAW'(acc_addr_d[1]);
  end

  always_ff @(posedge clk) begin
    ofm_q          <= ofm_rd;
    acc_addr_d[0]  <= iss_acc_addr;
    acc_first_d[0] <= iss_first;
    for (int i = 1; i < 3; i++) begin
      acc_addr_d[i]  <= acc_addr_d[i-1];
      acc_first_d[i] <= acc_first_d[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) iss_q <= 1'b0;
    else        iss_q <= iss;

  assign kernel_busy = iss;

  // ---------------------------------------------------------- stream outputs
  logic relu_bp;
  assign relu_bp = is_bp && c.relu;

  fp32_t sv;
  always_comb begin
    sv            = FP_ZERO;
    ifm_cmd_valid = (st == S_IFM_CMD);
    ofm_cmd_valid = (st == S_OFM_CMD) || (st == S_STORE_CMD && relu_bp && !cmd_b_done);
    wei_cmd_valid = (st == S_WEI_CMD) || (st == S_UPD_CMD && !cmd_b_done);
    out_cmd_valid = (st == S_STORE_CMD || st == S_UPD_CMD) && !cmd_a_done;
    ifm_ready     = (st == S_IFM_LOAD);
    wei_ready     = (st == S_WEI_LOAD) || (st == S_UPD && out_ready);
    ofm_ready     = (st == S_OFM_LOAD) || (st == S_STORE && relu_bp && out_ready);
    out_valid     = 1'b0;
    for (int j = 0; j < P; j++) out_data[j] = FP_ZERO;
    if (st == S_STORE) begin
      out_valid = relu_bp ? ofm_valid : 1'b1;
      for (int j = 0; j < P; j++) begin
        sv = ofm_rd[int'(beat % LPB) * P + j];
        if (c.relu && !is_bp) out_data[j] = fp_gt(sv, FP_ZERO) ? sv : FP_ZERO;
        else if (relu_bp)     out_data[j] = fp_gt(ofm_data[j], FP_ZERO) ? sv : FP_ZERO;
        else                  out_data[j] = sv;
      end
    end else if (st == S_UPD) begin
      out_valid = wei_valid;
      for (int j = 0; j < P; j++)
        out_data[j] = fp_sub(wei_data[j], fp_mul(c.lr, upd_g[j]));
    end
  end

  assign busy = (st != S_IDLE);

  // ------------------------------------------------------------- controller
  logic last_ci, last_cj, last_ctr, last_ctc;
  assign last_ci  = (ci  == 32'(c.k) - 1);
  assign last_cj  = (cj  == 32'(c.k) - 1);
  assign last_ctr = (ctr == trows - 1);
  assign last_ctc = (ctc == 32'(c.c) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      c  <= '0;
      is_bp <= 1'b0; is_wu <= 1'b0;
      grp <= '0; bimg <= '0; tot <= '0; tit <= '0; row0 <= '0;
      beat <= '0; beats_total <= '0;
      ci <= '0; cj <= '0; ctr <= '0; ctc <= '0; drain <= '0;
      cmd_a_done <= 1'b0; cmd_b_done <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          c     <= cfg;
          is_bp <= (cfg.op == OP_CONV_BP);
          is_wu <= (cfg.op == OP_CONV_WU);
          grp <= '0; bimg <= '0; tot <= '0; tit <= '0; row0 <= '0;
          st <= S_TILE;
        end
        S_TILE: st <= is_wu ? S_OFM_CMD : S_IFM_CMD;
        S_OFM_CMD: if (ofm_cmd_ready) begin
          beat <= '0; beats_total <= trows * 32'(c.c) * LPB; st <= S_OFM_LOAD;
        end
        S_OFM_LOAD: if (ofm_valid) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) st <= S_IFM_CMD;
        end
        S_IFM_CMD: if (ifm_cmd_ready) begin
          beat <= '0; beats_total <= trin * cin * LPB; st <= S_IFM_LOAD;
        end
        S_IFM_LOAD: if (ifm_valid) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) begin
            ci <= '0; cj <= '0; ctr <= '0; ctc <= '0;
            st <= (!is_wu && bimg == 0 && row0 == 0) ? S_WEI_CMD : S_COMP;
          end
        end
        S_WEI_CMD: if (wei_cmd_ready) begin
          beat <= '0; beats_total <= kk * WLPB; st <= S_WEI_LOAD;
        end
        S_WEI_LOAD: if (wei_valid) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) st <= S_COMP;
        end
        S_COMP: begin
          // FP/BP order: kr, kc, row, col (col fastest); WU: row, col, kr, kc
          if (!is_wu) begin
            ctc <= last_ctc ? '0 : ctc + 1;
            if (last_ctc) begin
              ctr <= last_ctr ? '0 : ctr + 1;
              if (last_ctr) begin
                cj <= last_cj ? '0 : cj + 1;
                if (last_cj) ci <= ci + 1;
              end
            end
          end else begin
            cj <= last_cj ? '0 : cj + 1;
            if (last_cj) begin
              ci <= last_ci ? '0 : ci + 1;
              if (last_ci) begin
                ctc <= last_ctc ? '0 : ctc + 1;
                if (last_ctc) ctr <= ctr + 1;
              end
            end
          end
          if (last_ci && last_cj && last_ctr && last_ctc) begin
            drain <= 2'd3;
            st    <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain <= drain - 1;
          if (drain == 2'd1) begin
            if (!is_wu) begin
              if (tit == n_ti - 1) begin
                cmd_a_done <= 1'b0; cmd_b_done <= 1'b0;
                st <= S_STORE_CMD;
              end else begin
                tit <= tit + 1;
                st  <= S_TILE;
              end
            end else begin
              // WU: row block, then input tile, output tile, image
              st <= S_TILE;
              if (row0 + 32'(c.tr) < 32'(c.r)) row0 <= row0 + 32'(c.tr);
              else begin
                row0 <= '0;
                if (tit != n_ti - 1) tit <= tit + 1;
                else begin
                  tit <= '0;
                  if (tot + 1 != grp_end) tot <= tot + 1;
                  else begin
                    tot <= grp_start;
                    if (bimg + 1 != 32'(c.b)) bimg <= bimg + 1;
                    else begin
                      bimg <= '0;
                      cmd_a_done <= 1'b0; cmd_b_done <= 1'b0;
                      st <= S_UPD_CMD;
                    end
                  end
                end
              end
            end
          end
        end
        S_STORE_CMD: begin
          if (out_cmd_ready) cmd_a_done <= 1'b1;
          if (ofm_cmd_ready && relu_bp) cmd_b_done <= 1'b1;
          if ((cmd_a_done || out_cmd_ready) &&
              (!relu_bp || cmd_b_done || ofm_cmd_ready)) begin
            beat <= '0; beats_total <= trows * 32'(c.c) * LPB; st <= S_STORE;
          end
        end
        S_STORE: if (out_valid && out_ready) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) begin
            tit <= '0;
            st  <= S_TILE;
            if (row0 + 32'(c.tr) < 32'(c.r)) row0 <= row0 + 32'(c.tr);
            else begin
              row0 <= '0;
              if (tot + 1 != grp_end) tot <= tot + 1;
              else begin
                tot <= grp_start;
                if (bimg + 1 != 32'(c.b)) bimg <= bimg + 1;
                else begin
                  bimg <= '0;
                  if (grp_end == n_to) st <= S_DONE;
                  else begin
                    grp <= grp + 1;
                    tot <= grp_end;
                  end
                end
              end
            end
          end
        end
        S_UPD_CMD: begin
          if (out_cmd_ready) cmd_a_done <= 1'b1;
          if (wei_cmd_ready) cmd_b_done <= 1'b1;
          if ((cmd_a_done || out_cmd_ready) && (cmd_b_done || wei_cmd_ready)) begin
            beat <= '0; beats_total <= kk * WLPB; st <= S_UPD;
          end
        end
        S_UPD: if (out_valid && out_ready) begin
          beat <= beat + 1;
          if (beat == beats_total - 1) begin
            cmd_a_done <= 1'b0; cmd_b_done <= 1'b0;
            st <= S_UPD_CMD;
            if (tit != n_ti - 1) tit <= tit + 1;
            else begin
              tit <= '0;
              if (tot + 1 != grp_end) tot <= tot + 1;
              else if (grp_end == n_to) st <= S_DONE;
              else begin
                grp <= grp + 1;
                tot <= grp_end;
                st  <= S_TILE;
              end
            end
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // stream rules: a command is held until it is taken
  property p_hold(v, r);
    @(posedge clk) (v && !r) |=> v;
  endproperty
  a_ifm_cmd: assert property (p_hold(ifm_cmd_valid, ifm_cmd_ready));
  a_out_cmd: assert property (p_hold(out_cmd_valid, out_cmd_ready));
endmodule
