// conv_kernel -- the unified multiply-accumulate array used for Conv FP, BP
// and WU.
//
// TM x TN floating-point multipliers are shared by all three processes, as in
// the accelerator figure of the paper:
//   * FP/BP (wu = 0): multiplier (m,n) forms wei[m][n] * ifm[n]; each of the
//     TM adder trees sums its TN products, giving one partial output per
//     output channel per cycle. The OFM buffer accumulates these sums.
//   * WU (wu = 1): multiplier (m,n) forms ofm[m] * ifm[n] (loss times
//     activation); the TM x TN products are handed out separately and the
//     Weight buffer accumulates each into its own gradient.
// The adder-tree structure is the paper's; the pipeline depth is this
// design's choice: stage 1 registers the products, stage 2 the tree sums, so
// prod is valid one cycle after in_valid (prod_valid) and sum two cycles
// after it (sum_valid). One new operand set is accepted every cycle.
module conv_kernel
  import fp32_pkg::*;
#(
  parameter int unsigned TM = 16,
  parameter int unsigned TN = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  wu,                  // 0: FP/BP pattern, 1: WU pattern
  input  fp32_t ifm [TN],            // TN input features (activation or loss)
  input  fp32_t wei [TM][TN],        // weights (FP/BP)
  input  fp32_t ofm [TM],            // loss of the output channels (WU)
  output logic  prod_valid,
  output logic  sum_valid,
  output fp32_t sum  [TM],           // FP/BP: adder-tree outputs
  output fp32_t prod [TM][TN]        // WU: individual products
);
  // smallest power of two >= TN: the tree is padded with zeros
  localparam int unsigned TP = (TN <= 1) ? 1 : (1 << $clog2(TN));

  fp32_t p_q [TM][TN];
  logic  v1, v2;
  fp32_t s_d [TM];
  fp32_t s_q [TM];

  always_ff @(posedge clk) begin
    for (int m = 0; m < TM; m++)
      for (int n = 0; n < TN; n++)
        p_q[m][n] <= wu ? fp_mul(ofm[m], ifm[n]) : fp_mul(wei[m][n], ifm[n]);
  end

  // adder trees, one per output channel
  always_comb begin
    fp32_t lvl [TP];
    for (int m = 0; m < TM; m++) begin
      for (int i = 0; i < TP; i++) lvl[i] = (i < TN) ? p_q[m][i] : FP_ZERO;
      for (int w = TP / 2; w >= 1; w = w / 2)
        for (int i = 0; i < w; i++) lvl[i] = fp_add(lvl[2*i], lvl[2*i+1]);
      s_d[m] = lvl[0];
    end
  end

  always_ff @(posedge clk) s_q <= s_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
    end
  end

  assign prod_valid = v1;
  assign sum_valid  = v2;
  assign sum       = s_q;
  assign prod      = p_q;
endmodule
