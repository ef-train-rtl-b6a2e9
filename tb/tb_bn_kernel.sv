// tb_bn_kernel -- runs a batch-normalization layer forward and backward on
// bn_kernel with the DRAM/DMA model and compares A-hat, A_out, lambda, the
// loss L_out and the updated gamma/beta with a double-precision reference of
// the paper's Eq. 7-15 (relative tolerance 1e-4, since the hardware uses
// single precision and its own summation order). Also checks the cycle
// count of the three FP input passes: one P-word beat per cycle is the
// design rate, so each pass may take at most the beat count plus a bounded
// DMA start and back-pressure overhead.
module tb_bn_kernel;
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

  bn_kernel #(.T(T), .P(P), .MAXM(32)) dut (
    .clk, .rst_n, .start, .cfg, .done,
    .ifm_cmd_valid(rcv[0]), .ifm_cmd(rc[0]), .ifm_cmd_ready(rcr[0]),
    .ifm_valid(rv[0]), .ifm_data(rd[0]), .ifm_ready(rr[0]),
    .ofm_cmd_valid(rcv[1]), .ofm_cmd(rc[1]), .ofm_cmd_ready(rcr[1]),
    .ofm_valid(rv[1]), .ofm_data(rd[1]), .ofm_ready(rr[1]),
    .wei_cmd_valid(rcv[2]), .wei_cmd(rc[2]), .wei_cmd_ready(rcr[2]),
    .wei_valid(rv[2]), .wei_data(rd[2]), .wei_ready(rr[2]),
    .out_cmd_valid(wcv), .out_cmd(wc), .out_cmd_ready(wcr),
    .out_valid(wv), .out_data(wd), .out_ready(wr));

  tb_dram_dma #(.P(P), .WORDS(1 << 16), .TSTART(20)) mem (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd(rc), .rd_cmd_ready(rcr),
    .rd_valid(rv), .rd_data(rd), .rd_ready(rr), .wr_cmd_valid(wcv),
    .wr_cmd(wc), .wr_cmd_ready(wcr), .wr_valid(wv), .wr_data(wd), .wr_ready(wr));

  int checks = 0, failures = 0;
  int pass_cycles, beats_in;
  always @(posedge clk) begin
    if (dut.st inside {4'd4, 4'd7, 4'd9}) pass_cycles++;   // S_PASS1/2/3
    if (rv[0] && rr[0]) beats_in++;
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
    pass_cycles = 0; beats_in = 0;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    t = 0;
    while (!done && t < 400000) begin @(posedge clk); t++; end
    checks++;
    if (!done) begin failures++; $display("FAIL: bn op %0d did not finish", l.op); end
  endtask

  task automatic check(input string what, input fp32_t got, input real exp);
    real g, tol;
    checks++;
    g = f2r(got);
    tol = 1e-4 * ((exp < 0.0 ? -exp : exp) + 1e-2);
    if (g - exp > tol || exp - g > tol) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %f exp %f", what, g, exp);
    end
  endtask

  task automatic test(input int M, input int R, input int C, input int B);
    layer_cfg_t l;
    int IB = 0, PB = 8192, OB = 12288, XB = 16384, QB = 20480, LB = 24576, GB = 32768, UB = 40960;
    int n;
    real mean [64], var_ [64], lam [64], gam [64], bet [64], dg [64], db [64], x, ah, lr;
    n = B * R * C;
    lr = 0.125;
    for (int m = 0; m < M; m++) begin
      gam[m] = real'($urandom_range(64, 16)) / 32.0;
      bet[m] = real'($urandom_range(64, 0)) / 32.0 - 1.0;
      mem.mem[PB + m] = r2f(gam[m]);
      mem.mem[PB + M + m] = r2f(bet[m]);
    end
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < R; y++) for (int xx = 0; xx < C; xx++)
        mem.mem[fm(IB, M, R, C, b, m, y, xx)] = r2f(real'($urandom_range(5000, 0)) / 1000.0 - 2.0);
    for (int m = 0; m < M; m++) begin
      mean[m] = 0.0; var_[m] = 0.0;
      for (int b = 0; b < B; b++) for (int y = 0; y < R; y++) for (int xx = 0; xx < C; xx++) begin
        x = f2r(mem.mem[fm(IB, M, R, C, b, m, y, xx)]);
        mean[m] += x; var_[m] += x * x;
      end
      mean[m] /= n;
      var_[m] = var_[m] / n - mean[m] * mean[m];
      lam[m] = 1.0 / $sqrt(var_[m] + 1e-5);
    end
    // ---- forward
    l = '0;
    l.op = OP_BN_FP; l.m = 16'(M); l.r = 16'(R); l.c = 16'(C); l.b = 16'(B);
    l.ifm_base = IB; l.wei_base = PB; l.out_base = OB; l.aux_base = XB; l.ofm_base = QB;
    l.lr = r2f(lr);
    run(l);
    checks++;
    if (beats_in != 3 * n * M / P || pass_cycles > beats_in * 2 + 3 * 200) begin
      failures++; $display("FAIL bn FP pass cycles %0d for %0d beats", pass_cycles, beats_in);
    end
    $display("BN FP: %0d input beats in %0d pass cycles", beats_in, pass_cycles);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < R; y++) for (int xx = 0; xx < C; xx++) begin
        x  = f2r(mem.mem[fm(IB, M, R, C, b, m, y, xx)]);
        ah = (x - mean[m]) * lam[m];
        check("a_hat", mem.mem[fm(XB, M, R, C, b, m, y, xx)], ah);
        check("a_out", mem.mem[fm(OB, M, R, C, b, m, y, xx)], ah * gam[m] + bet[m]);
      end
    for (int m = 0; m < M; m++) begin
      check("gamma st", mem.mem[QB + m], gam[m]);
      check("beta st", mem.mem[QB + M + m], bet[m]);
      check("lambda", mem.mem[QB + 2 * M + m], lam[m]);
    end
    // ---- backward: A-hat from the FP pass, random loss
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < R; y++) for (int xx = 0; xx < C; xx++)
        mem.mem[fm(LB, M, R, C, b, m, y, xx)] = r2f(real'($urandom_range(2000, 0)) / 1000.0 - 1.0);
    for (int m = 0; m < M; m++) begin
      dg[m] = 0.0; db[m] = 0.0;
      for (int b = 0; b < B; b++) for (int y = 0; y < R; y++) for (int xx = 0; xx < C; xx++) begin
        dg[m] += f2r(mem.mem[fm(LB, M, R, C, b, m, y, xx)]) * f2r(mem.mem[fm(XB, M, R, C, b, m, y, xx)]);
        db[m] += f2r(mem.mem[fm(LB, M, R, C, b, m, y, xx)]);
      end
    end
    l.op = OP_BN_BP; l.ifm_base = XB; l.ofm_base = LB; l.wei_base = QB;
    l.out_base = GB; l.aux_base = UB;
    run(l);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < R; y++) for (int xx = 0; xx < C; xx++) begin
        real lv;
        lv = f2r(mem.mem[fm(LB, M, R, C, b, m, y, xx)]);
        ah = f2r(mem.mem[fm(XB, M, R, C, b, m, y, xx)]);
        check("l_out", mem.mem[fm(GB, M, R, C, b, m, y, xx)],
              gam[m] * f2r(mem.mem[QB + 2 * M + m]) * (lv - db[m] / n - ah * dg[m] / n));
      end
    for (int m = 0; m < M; m++) begin
      check("gamma upd", mem.mem[UB + m], gam[m] - lr * dg[m]);
      check("beta upd", mem.mem[UB + M + m], bet[m] - lr * db[m]);
    end
  endtask

  initial begin
    start = 1'b0;
    cfg   = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    test(16, 3, 5, 2);
    test(8, 4, 4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
