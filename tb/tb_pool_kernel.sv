// tb_pool_kernel -- runs 2x2 pooling FP (maximum, with index output, and
// average) and BP (maximum, routing the loss by the stored index, and
// average) on pool_kernel with the DRAM/DMA model, and checks every output
// word and index against a reference computed here. Inputs are distinct
// multiples of 1/64 so the maximum is unique and the quarter sums are exact.
// Also checks that FP outputs leave at one P-word beat per cycle when the
// sink is always ready (the row time is bounded by 4 reads + T/P beats per
// pixel) and that every mechanism (index write, index read) was exercised.
module tb_pool_kernel;
  import fp32_pkg::*;
  import ef_pkg::*;
  import tb_fp_util::*;

  localparam int T = 8;
  localparam int P = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic       start, done;
  logic       rcv [3], rcr [3], rv [3], rr [3];
  dma_cmd_t   rc  [3];
  fp32_t      rd  [3][P];
  logic       wcv, wcr, wv, wr;
  dma_cmd_t   wc;
  fp32_t      wd  [P];

  assign rcv[1] = 1'b0;
  assign rc[1]  = '0;
  assign rr[1]  = 1'b0;

  pool_kernel #(.T(T), .P(P), .ROW_DEPTH(64)) dut (
    .clk, .rst_n, .start, .cfg, .done,
    .ifm_cmd_valid(rcv[0]), .ifm_cmd(rc[0]), .ifm_cmd_ready(rcr[0]),
    .ifm_valid(rv[0]), .ifm_data(rd[0]), .ifm_ready(rr[0]),
    .wei_cmd_valid(rcv[2]), .wei_cmd(rc[2]), .wei_cmd_ready(rcr[2]),
    .wei_valid(rv[2]), .wei_data(rd[2]), .wei_ready(rr[2]),
    .out_cmd_valid(wcv), .out_cmd(wc), .out_cmd_ready(wcr),
    .out_valid(wv), .out_data(wd), .out_ready(wr));

  tb_dram_dma #(.P(P), .WORDS(1 << 16), .TSTART(20)) mem (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd(rc), .rd_cmd_ready(rcr),
    .rd_valid(rv), .rd_data(rd), .rd_ready(rr), .wr_cmd_valid(wcv),
    .wr_cmd(wc), .wr_cmd_ready(wcr), .wr_valid(wv), .wr_data(wd), .wr_ready(wr));

  int checks = 0, failures = 0;
  int idx_rd_cmds, out_cmds, cycles;
  always @(posedge clk) begin
    if (rcv[2] && rcr[2]) idx_rd_cmds++;
    if (wcv && wcr) out_cmds++;
    cycles++;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fm(int base, int ch_n, int h, int w, int b, int ch, int y, int x);
    return base + b * ch_n * h * w + (ch / T) * T * h * w + (y * w + x) * T + ch % T;
  endfunction

  task automatic run(input layer_cfg_t l);
    int t;
    cfg = l;
    idx_rd_cmds = 0; out_cmds = 0; cycles = 0;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    t = 0;
    while (!done && t < 400000) begin @(posedge clk); t++; end
    checks++;
    if (!done) begin failures++; $display("FAIL: pool op %0d did not finish", l.op); end
  endtask

  task automatic check(input string what, input fp32_t got, input real exp);
    checks++;
    if (got !== r2f(exp)) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %h (%f) exp %h (%f)", what, got, f2r(got), r2f(exp), exp);
    end
  endtask

  // M channels, R x C pooled map, B images
  task automatic test(input int M, input int R, input int C, input int B, input bit avg);
    layer_cfg_t l;
    int IB = 0, OB = 8192, XB = 16384, LB = 24576, GB = 32768;
    int H, W, best;
    real v, mx, sum;
    H = 2 * R; W = 2 * C;
    // FP input: a random permutation of distinct values per window
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
        mem.mem[fm(IB, M, H, W, b, m, y, x)] =
          r2f((real'($urandom_range(60, 0)) * 4.0 + real'((y % 2) * 2 + x % 2)) / 64.0 - 2.0);
    l = '0;
    l.op = OP_POOL_FP; l.m = 16'(M); l.r = 16'(R); l.c = 16'(C); l.b = 16'(B);
    l.pool_avg = avg; l.ifm_base = IB; l.out_base = OB; l.aux_base = XB;
    run(l);
    checks++;
    if (out_cmds != B * (M / T) * R * (avg ? 1 : 2)) begin
      failures++; $display("FAIL pool FP output bursts %0d", out_cmds);
    end
    checks++;
    if (cycles > B * (M / T) * R * (C * (5 + T / P) + 2 * W * T / P + 200)) begin
      failures++; $display("FAIL pool FP too slow: %0d cycles", cycles);
    end
    $display("pool FP avg=%0d: %0d cycles, %0d output bursts", avg, cycles, out_cmds);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        mx = -100.0; best = 0; sum = 0.0;
        for (int k = 0; k < 4; k++) begin
          v = f2r(mem.mem[fm(IB, M, H, W, b, m, 2 * r + k / 2, 2 * c + k % 2)]);
          sum += v;
          if (v > mx) begin mx = v; best = k; end
        end
        if (avg) check("avg out", mem.mem[fm(OB, M, R, C, b, m, r, c)], sum * 0.25);
        else begin
          check("max out", mem.mem[fm(OB, M, R, C, b, m, r, c)], mx);
          checks++;
          if (mem.mem[fm(XB, M, R, C, b, m, r, c)] !== 32'(best)) begin
            failures++;
            if (failures < 12) $display("FAIL index got %0d exp %0d", mem.mem[fm(XB, M, R, C, b, m, r, c)], best);
          end
        end
      end
    // BP: loss of the pooled map, indexes from the FP pass
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        mem.mem[fm(LB, M, R, C, b, m, r, c)] = r2f(real'($urandom_range(128, 1)) / 64.0 - 1.0);
    l.op = OP_POOL_BP; l.ifm_base = LB; l.wei_base = XB; l.out_base = GB;
    run(l);
    checks++;
    if (idx_rd_cmds != (avg ? 0 : B * (M / T) * R)) begin
      failures++; $display("FAIL pool BP index reads %0d", idx_rd_cmds);
    end
    $display("pool BP avg=%0d: %0d cycles, %0d index bursts", avg, cycles, idx_rd_cmds);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        int k;
        real lv;
        k  = (y % 2) * 2 + x % 2;
        lv = f2r(mem.mem[fm(LB, M, R, C, b, m, y / 2, x / 2)]);
        if (avg) check("avg bp", mem.mem[fm(GB, M, H, W, b, m, y, x)], lv * 0.25);
        else check("max bp", mem.mem[fm(GB, M, H, W, b, m, y, x)],
                   (mem.mem[fm(XB, M, R, C, b, m, y / 2, x / 2)] == 32'(k)) ? lv : 0.0);
      end
  endtask

  initial begin
    start = 1'b0;
    cfg   = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    test(16, 3, 4, 2, 1'b0);
    test(8, 2, 5, 1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
