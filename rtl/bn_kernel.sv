// bn_kernel -- batch normalization layer, forward and backward, with its
// BN Parameters buffer.
//
// Forward (op OP_BN_FP), following the computation flow of the paper:
//   1. gamma[M], beta[M] are loaded on the WEI channel (wei_base: gamma then
//      beta) into the parameter buffer.
//   2. The activation of the whole mini-batch streams in on the IFM channel;
//      per channel the sum and the sum of squares are accumulated.
//   3. Per channel: E = sum/n, V = E(X^2) - E^2, lambda = 1/sqrt(V + eps),
//      with n = B*R*C, on one scalar fp32_alu (seven operations per channel).
//   4. The activation streams in again and A-hat = (A - E)*lambda streams out
//      on the OUT channel (to aux_base).
//   5. The activation streams in a third time and A_out = A-hat*gamma + beta
//      streams out (to out_base).
//   6. gamma, beta, lambda are written out (to ofm_base, 3*M words).
// Backward (op OP_BN_BP):
//   1. gamma, beta, lambda are loaded on the WEI channel (wei_base, 3*M).
//   2. A-hat (IFM channel) and the loss L (OFM channel) stream in together;
//      per channel dgamma += L*A-hat and dbeta += L.
//   3. Per channel: gamma*lambda, dbeta/n, dgamma/n and the updated
//      parameters gamma - lr*dgamma, beta - lr*dbeta.
//   4. A-hat and L stream in again and
//      L_out = gamma*lambda*(L - dbeta/n - A-hat*dgamma/n) streams out.
//   5. The updated gamma, beta are written out (to aux_base, 2*M words).
// The equations are the paper's. The stream formats (the whole tensor in the
// reshaped layout as one burst per pass, parameters as flat arrays), the
// third input pass in FP instead of writing two tensors at once, eps = 1e-5
// and the use of the learning rate in the parameter update are this design's
// choices. Channel of a stream word: the tensor is in groups of T channels,
// pixel by pixel, so a counter of lane group, pixel and group gives it.
// Interface: like the other engines; cfg.m channels (<= MAXM, multiple of T),
// cfg.r x cfg.c pixels, cfg.b images.
module bn_kernel
  import fp32_pkg::*;
  import ef_pkg::*;
#(
  parameter int unsigned T    = 16,
  parameter int unsigned P    = 4,
  parameter int unsigned MAXM = 512
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
  output logic       ofm_cmd_valid,
  output dma_cmd_t   ofm_cmd,
  input  logic       ofm_cmd_ready,
  input  logic       ofm_valid,
  input  fp32_t      ofm_data [P],
  output logic       ofm_ready,
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
  localparam int unsigned CW  = $clog2(MAXM);
  localparam fp32_t       EPS = 32'h3727_c5ac;   // 1e-5

  typedef enum logic [3:0] {
    S_IDLE, S_PCMD, S_PLOAD, S_CMD1, S_PASS1, S_SCAL, S_CMD2, S_PASS2,
    S_CMD3, S_PASS3, S_SCMD, S_STORE, S_DONE
  } state_e;

  state_e      st;
  layer_cfg_t  c;
  logic        bp;
  logic        cmd_a, cmd_b, cmd_a_out;
  fp32_t       alu_keep;           // E(X^2) held while E^2 is formed

  // BN Parameters buffer and per-channel statistics
  fp32_t gam [MAXM], bet [MAXM], lam [MAXM];
  fp32_t s1 [MAXM], s2 [MAXM];       // FP: sum, sum of squares; BP: dgamma, dbeta
  fp32_t q1 [MAXM], q2 [MAXM];       // FP: mean, -; BP: dbeta/n, dgamma/n
  fp32_t gnew [MAXM], bnew [MAXM];

  logic [31:0] total, beat, lb, pixc, grp, npix, ch0;
  fp32_t       inv_n;
  logic [31:0] sch;                 // scalar phase: channel
  logic [2:0]  sop;                 // scalar phase: step
  fp32_t       stmp;

  assign npix = 32'(c.r) * 32'(c.c);
  assign ch0  = grp * T + lb * P;   // channel of lane 0 of the current beat

  // scalar unit
  fp_op_e alu_op;
  fp32_t  alu_a, alu_b, alu_y;
  fp32_alu u_alu (.op(alu_op), .a(alu_a), .b(alu_b), .y(alu_y));

  always_comb begin
    alu_op = FP_MUL; alu_a = FP_ZERO; alu_b = FP_ZERO;
    if (!bp) begin
      unique case (sop)
        3'd0: begin alu_op = FP_MUL;  alu_a = s1[CW'(sch)]; alu_b = inv_n; end      // E
        3'd1: begin alu_op = FP_MUL;  alu_a = s2[CW'(sch)]; alu_b = inv_n; end      // E(X^2)
        3'd2: begin alu_op = FP_MUL;  alu_a = q1[CW'(sch)]; alu_b = q1[CW'(sch)]; end
        3'd3: begin alu_op = FP_SUB;  alu_a = alu_keep;     alu_b = stmp; end       // V
        3'd4: begin alu_op = FP_ADD;  alu_a = stmp;         alu_b = EPS; end
        3'd5: begin alu_op = FP_SQRT; alu_a = stmp; end
        default: begin alu_op = FP_DIV; alu_a = FP_ONE; alu_b = stmp; end          // lambda
      endcase
    end else begin
      unique case (sop)
        3'd0: begin alu_op = FP_MUL; alu_a = gam[CW'(sch)]; alu_b = lam[CW'(sch)]; end
        3'd1: begin alu_op = FP_MUL; alu_a = s2[CW'(sch)];  alu_b = inv_n; end
        3'd2: begin alu_op = FP_MUL; alu_a = s1[CW'(sch)];  alu_b = inv_n; end
        3'd3: begin alu_op = FP_MUL; alu_a = c.lr;          alu_b = s1[CW'(sch)]; end
        3'd4: begin alu_op = FP_SUB; alu_a = gam[CW'(sch)]; alu_b = stmp; end
        3'd5: begin alu_op = FP_MUL; alu_a = c.lr;          alu_b = s2[CW'(sch)]; end
        default: begin alu_op = FP_SUB; alu_a = bet[CW'(sch)]; alu_b = stmp; end
      endcase
    end
  end

  // commands
  always_comb begin
    ifm_cmd = '0; ofm_cmd = '0; wei_cmd = '0; out_cmd = '0;
    total = 32'(c.b) * 32'(c.m) * npix;
    ifm_cmd.addr = c.ifm_base;  ifm_cmd.len = total;
    ofm_cmd.addr = c.ofm_base;  ofm_cmd.len = total;
    wei_cmd.addr = c.wei_base;  wei_cmd.len = (bp ? 3 : 2) * 32'(c.m);
    unique case (st)
      S_CMD2:  begin out_cmd.addr = bp ? c.out_base : c.aux_base; out_cmd.len = total; end
      S_CMD3:  begin out_cmd.addr = c.out_base; out_cmd.len = total; end
      default: begin out_cmd.addr = bp ? c.aux_base : c.ofm_base;
                     out_cmd.len  = (bp ? 2 : 3) * 32'(c.m); end
    endcase
    wei_cmd_valid = (st == S_PCMD);
    ifm_cmd_valid = (st == S_CMD1 || st == S_CMD2 || st == S_CMD3) && !cmd_a;
    ofm_cmd_valid = bp && (st == S_CMD1 || st == S_CMD2) && !cmd_b;
    out_cmd_valid = (st == S_CMD2 || st == S_CMD3 || st == S_SCMD) && !cmd_a_out;
  end

  // stream datapath
  logic in_ok;   // all inputs of this pass have a word
  assign in_ok = ifm_valid && (!bp || ofm_valid);

  // per-lane arithmetic of the stream passes and the parameter store
  fp32_t lane_ah [P], lane_fp [P], lane_bp [P], lane_st [P];
  logic [CW-1:0] lane_ch [P], lane_pc [P];
  logic [31:0]   lane_pe [P];
  always_comb begin
    for (int j = 0; j < P; j++) begin
      lane_ch[j] = CW'(ch0 + 32'(j));
      lane_ah[j] = fp_mul(fp_sub(ifm_data[j], q1[lane_ch[j]]), lam[lane_ch[j]]);
      lane_fp[j] = fp_add(fp_mul(lane_ah[j], gam[lane_ch[j]]), bet[lane_ch[j]]);
      // lam holds gamma*lambda in BP
      lane_bp[j] = fp_mul(lam[lane_ch[j]],
                          fp_sub(fp_sub(ofm_data[j], q1[lane_ch[j]]),
                                 fp_mul(ifm_data[j], q2[lane_ch[j]])));
      lane_pe[j] = beat * P + 32'(j);
      lane_pc[j] = CW'(lane_pe[j] % 32'(c.m));
      if (bp) lane_st[j] = (lane_pe[j] < 32'(c.m)) ? gnew[lane_pc[j]] : bnew[lane_pc[j]];
      else    lane_st[j] = (lane_pe[j] < 32'(c.m)) ? gam[lane_pc[j]]
                         : (lane_pe[j] < 2 * 32'(c.m)) ? bet[lane_pc[j]] : lam[lane_pc[j]];
    end
  end

  always_comb begin
    wei_ready = (st == S_PLOAD);
    ifm_ready = 1'b0; ofm_ready = 1'b0; out_valid = 1'b0;
    for (int j = 0; j < P; j++) out_data[j] = FP_ZERO;
    unique case (st)
      S_PASS1: begin ifm_ready = in_ok; ofm_ready = bp && in_ok; end
      S_PASS2, S_PASS3: begin
        out_valid = in_ok;
        ifm_ready = in_ok && out_ready;
        ofm_ready = bp && in_ok && out_ready;
        for (int j = 0; j < P; j++)
          out_data[j] = bp ? lane_bp[j] : (st == S_PASS2) ? lane_ah[j] : lane_fp[j];
      end
      S_STORE: begin
        out_valid = 1'b1;
        for (int j = 0; j < P; j++) out_data[j] = lane_st[j];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; bp <= 1'b0; done <= 1'b0;
      cmd_a <= 1'b0; cmd_b <= 1'b0; cmd_a_out <= 1'b0;
      beat <= '0; lb <= '0; pixc <= '0; grp <= '0;
      inv_n <= FP_ZERO; sch <= '0; sop <= '0; stmp <= FP_ZERO; alu_keep <= FP_ZERO;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          c <= cfg; bp <= (cfg.op == OP_BN_BP);
          inv_n <= fp_div(FP_ONE, fp_from_uint(32'(cfg.b) * 32'(cfg.r) * 32'(cfg.c)));
          st <= S_PCMD;
        end
        S_PCMD: if (wei_cmd_ready) begin beat <= '0; st <= S_PLOAD; end
        S_PLOAD: if (wei_valid) begin
          for (int j = 0; j < P; j++) begin
            if (lane_pe[j] < 32'(c.m))          gam[lane_pc[j]] <= wei_data[j];
            else if (lane_pe[j] < 2 * 32'(c.m)) bet[lane_pc[j]] <= wei_data[j];
            else                                lam[lane_pc[j]] <= wei_data[j];
          end
          beat <= beat + 1;
          if ((beat + 1) * P >= (bp ? 3 : 2) * 32'(c.m)) begin
            for (int i = 0; i < MAXM; i++) begin s1[i] <= FP_ZERO; s2[i] <= FP_ZERO; end
            cmd_a <= 1'b0; cmd_b <= 1'b0;
            st <= S_CMD1;
          end
        end
        S_CMD1, S_CMD2, S_CMD3: begin
          if (ifm_cmd_valid && ifm_cmd_ready) cmd_a <= 1'b1;
          if (ofm_cmd_valid && ofm_cmd_ready) cmd_b <= 1'b1;
          if (out_cmd_valid && out_cmd_ready) cmd_a_out <= 1'b1;
          if ((cmd_a || ifm_cmd_ready) && (!bp || st == S_CMD3 || cmd_b || ofm_cmd_ready) &&
              (st == S_CMD1 || cmd_a_out || out_cmd_ready)) begin
            beat <= '0; lb <= '0; pixc <= '0; grp <= '0;
            st <= (st == S_CMD1) ? S_PASS1 : (st == S_CMD2) ? S_PASS2 : S_PASS3;
          end
        end
        S_PASS1, S_PASS2, S_PASS3: if (ifm_valid && ifm_ready) begin
          if (st == S_PASS1)
            for (int j = 0; j < P; j++) begin
              if (!bp) begin
                s1[lane_ch[j]] <= fp_add(s1[lane_ch[j]], ifm_data[j]);
                s2[lane_ch[j]] <= fp_add(s2[lane_ch[j]], fp_mul(ifm_data[j], ifm_data[j]));
              end else begin
                s1[lane_ch[j]] <= fp_add(s1[lane_ch[j]], fp_mul(ofm_data[j], ifm_data[j]));
                s2[lane_ch[j]] <= fp_add(s2[lane_ch[j]], ofm_data[j]);
              end
            end
          beat <= beat + 1;
          // lane group -> pixel -> channel group -> image
          if (lb != LPB - 1) lb <= lb + 1;
          else begin
            lb <= '0;
            if (pixc != npix - 1) pixc <= pixc + 1;
            else begin
              pixc <= '0;
              grp  <= (grp + 1 == 32'(c.m) / T) ? '0 : grp + 1;
            end
          end
          if ((beat + 1) * P == total) begin
            cmd_a <= 1'b0; cmd_b <= 1'b0; cmd_a_out <= 1'b0;
            unique case (st)
              S_PASS1: begin sch <= '0; sop <= '0; st <= S_SCAL; end
              S_PASS2: st <= bp ? S_SCMD : S_CMD3;
              default: st <= S_SCMD;
            endcase
          end
        end
        S_SCAL: begin
          sop <= (sop == 3'd6) ? 3'd0 : sop + 1;
          stmp <= alu_y;
          if (!bp) unique case (sop)
            3'd0: q1[CW'(sch)] <= alu_y;
            3'd1: alu_keep <= alu_y;
            3'd6: lam[CW'(sch)] <= alu_y;
            default: ;
          endcase
          else unique case (sop)
            3'd0: lam[CW'(sch)]  <= alu_y;     // gamma*lambda (old gamma)
            3'd1: q1[CW'(sch)]   <= alu_y;     // dbeta / n
            3'd2: q2[CW'(sch)]   <= alu_y;     // dgamma / n
            3'd4: gnew[CW'(sch)] <= alu_y;
            3'd6: bnew[CW'(sch)] <= alu_y;
            default: ;
          endcase
          if (sop == 3'd6) begin
            sch <= sch + 1;
            if (sch + 1 == 32'(c.m)) st <= S_CMD2;
          end
        end
        S_SCMD: if (out_cmd_ready) begin beat <= '0; st <= S_STORE; end
        S_STORE: if (out_ready) begin
          beat <= beat + 1;
          if ((beat + 1) * P >= (bp ? 2 : 3) * 32'(c.m)) st <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
