// tb_conv_engine -- runs Conv FP (stride 1 with ReLU, stride 2), BP (with
// transposed/flipped weights and the ReLU mask) and WU (gradient over a
// mini-batch and the SGD update) on conv_engine with a DRAM/DMA model, and
// compares every word written back with a reference computed here from the
// layer equations. Operands are multiples of 1/64 in [-1, 1], so every sum is
// exact in single precision and the comparison is bit exact whatever the
// summation order. Also checks the compute cycle count (trows*C*K*K per tile)
// and that weights are fetched once per layer (weight reuse).
module tb_conv_engine;
  import fp32_pkg::*;
  import ef_pkg::*;
  import tb_fp_util::*;

  localparam int T = 8;
  localparam int P = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic       start, busy, done, kbusy;
  logic       rcv [3], rcr [3], rv [3], rr [3];
  dma_cmd_t   rc  [3];
  fp32_t      rd  [3][P];
  logic       wcv, wcr, wv, wr;
  dma_cmd_t   wc;
  fp32_t      wd  [P];

  conv_engine #(.T(T), .P(P), .IFM_DEPTH(512), .OFM_DEPTH(256), .WEI_DEPTH(64)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .ifm_cmd_valid(rcv[0]), .ifm_cmd(rc[0]), .ifm_cmd_ready(rcr[0]),
    .ifm_valid(rv[0]), .ifm_data(rd[0]), .ifm_ready(rr[0]),
    .ofm_cmd_valid(rcv[1]), .ofm_cmd(rc[1]), .ofm_cmd_ready(rcr[1]),
    .ofm_valid(rv[1]), .ofm_data(rd[1]), .ofm_ready(rr[1]),
    .wei_cmd_valid(rcv[2]), .wei_cmd(rc[2]), .wei_cmd_ready(rcr[2]),
    .wei_valid(rv[2]), .wei_data(rd[2]), .wei_ready(rr[2]),
    .out_cmd_valid(wcv), .out_cmd(wc), .out_cmd_ready(wcr),
    .out_valid(wv), .out_data(wd), .out_ready(wr), .kernel_busy(kbusy));

  tb_dram_dma #(.P(P), .WORDS(1 << 16), .TSTART(20)) mem (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd(rc), .rd_cmd_ready(rcr),
    .rd_valid(rv), .rd_data(rd), .rd_ready(rr), .wr_cmd_valid(wcv),
    .wr_cmd(wc), .wr_cmd_ready(wcr), .wr_valid(wv), .wr_data(wd), .wr_ready(wr));

  int checks = 0, failures = 0;
  int kcycles, wei_cmds;
  always @(posedge clk) begin
    if (kbusy) kcycles++;
    if (rcv[2] && rcr[2]) wei_cmds++;
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int fm(int base, int ch_n, int h, int w, int b, int ch, int y, int x);
    return base + b * ch_n * h * w + (ch / T) * T * h * w + (y * w + x) * T + ch % T;
  endfunction
  function automatic int wa(int base, int n_in, int k, int m, int n, int kr, int kc);
    return base + ((m / T) * (n_in / T) + n / T) * T * T * k * k + (kr * k + kc) * T * T
         + (m % T) * T + n % T;
  endfunction
  function automatic fp32_t rnd64();
    return r2f(real'($urandom_range(128, 0)) / 64.0 - 1.0);
  endfunction

  task automatic run(input layer_cfg_t l);
    int t;
    cfg = l;
    kcycles = 0; wei_cmds = 0;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    t = 0;
    while (!done && t < 2000000) begin @(posedge clk); t++; end
    checks++;
    if (!done) begin failures++; $display("FAIL: layer op %0d did not finish", l.op); end
  endtask

  task automatic check(input string what, input fp32_t got, input real exp);
    checks++;
    if (got !== r2f(exp)) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %h (%f) exp %h (%f)", what, got, f2r(got), r2f(exp), exp);
    end
  endtask

  // ---------------------------------------------------------------- FP test
  task automatic test_fp(input int M, input int N, input int R, input int C, input int K,
                         input int S, input int TR, input int MON, input int B, input bit relu);
    layer_cfg_t l;
    int rin, cin;
    int IB = 0, WB = 16384, OB = 32768;
    real acc;
    rin = (R - 1) * S + K; cin = (C - 1) * S + K;
    for (int b = 0; b < B; b++) for (int n = 0; n < N; n++)
      for (int y = 0; y < rin; y++) for (int x = 0; x < cin; x++)
        mem.mem[fm(IB, N, rin, cin, b, n, y, x)] = rnd64();
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        mem.mem[wa(WB, N, K, m, n, i, j)] = rnd64();
    l = '0;
    l.op = OP_CONV_FP; l.m = 16'(M); l.n = 16'(N); l.r = 16'(R); l.c = 16'(C);
    l.k = 4'(K); l.s = 3'(S); l.tr = 16'(TR); l.m_on = 16'(MON); l.b = 16'(B); l.relu = relu;
    l.ifm_base = IB; l.wei_base = WB; l.out_base = OB;
    run(l);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        acc = 0.0;
        for (int n = 0; n < N; n++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
          acc += f2r(mem.mem[fm(IB, N, rin, cin, b, n, S * r + i, S * c + j)])
               * f2r(mem.mem[wa(WB, N, K, m, n, i, j)]);
        if (relu && acc < 0.0) acc = 0.0;
        check("fp out", mem.mem[fm(OB, M, R, C, b, m, r, c)], acc);
      end
    checks++;
    if (kcycles != B * (M / T) * (N / T) * R * C * K * K) begin
      failures++; $display("FAIL fp compute cycles %0d", kcycles);
    end
    checks++;
    if (wei_cmds != (M / T) * (N / T)) begin
      failures++; $display("FAIL fp weight fetches %0d", wei_cmds);
    end
    $display("failures so far %0d", failures);
    $display("FP M=%0d N=%0d S=%0d: %0d compute cycles, %0d weight tile fetches, restarts ifm %0d out %0d",
             M, N, S, kcycles, wei_cmds, mem.restarts[0], mem.restarts[3]);
  endtask

  // ---------------------------------------------------------------- BP test
  // original layer: MO outputs, NO inputs; BP layer: NO outputs, MO inputs
  task automatic test_bp(input int MO, input int NO, input int R, input int C, input int K,
                         input int TR, input int B);
    layer_cfg_t l;
    int rin, cin;
    int IB = 0, WB = 16384, AB = 24576, OB = 32768;
    real acc;
    rin = R - 1 + K; cin = C - 1 + K;
    for (int b = 0; b < B; b++) for (int m = 0; m < MO; m++)
      for (int y = 0; y < rin; y++) for (int x = 0; x < cin; x++)
        mem.mem[fm(IB, MO, rin, cin, b, m, y, x)] = rnd64();
    for (int m = 0; m < MO; m++) for (int n = 0; n < NO; n++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        mem.mem[wa(WB, NO, K, m, n, i, j)] = rnd64();
    for (int b = 0; b < B; b++) for (int n = 0; n < NO; n++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        mem.mem[fm(AB, NO, R, C, b, n, r, c)] = rnd64();
    l = '0;
    l.op = OP_CONV_BP; l.m = 16'(NO); l.n = 16'(MO); l.r = 16'(R); l.c = 16'(C);
    l.k = 4'(K); l.s = 3'd1; l.tr = 16'(TR); l.m_on = 16'(NO); l.b = 16'(B); l.relu = 1'b1;
    l.ifm_base = IB; l.wei_base = WB; l.ofm_base = AB; l.out_base = OB;
    run(l);
    for (int b = 0; b < B; b++) for (int n = 0; n < NO; n++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        acc = 0.0;
        for (int m = 0; m < MO; m++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
          acc += f2r(mem.mem[fm(IB, MO, rin, cin, b, m, r + i, c + j)])
               * f2r(mem.mem[wa(WB, NO, K, m, n, K - 1 - i, K - 1 - j)]);
        if (!(f2r(mem.mem[fm(AB, NO, R, C, b, n, r, c)]) > 0.0)) acc = 0.0;
        check("bp out", mem.mem[fm(OB, NO, R, C, b, n, r, c)], acc);
      end
    $display("failures so far %0d", failures);
    $display("BP: %0d compute cycles, %0d weight tile fetches", kcycles, wei_cmds);
  endtask

  // ---------------------------------------------------------------- WU test
  task automatic test_wu(input int M, input int N, input int R, input int C, input int K,
                         input int TR, input int MON, input int B);
    layer_cfg_t l;
    int rin, cin;
    int IB = 0, LB = 8192, WB = 16384, OB = 32768;
    real acc;
    fp32_t lr;
    lr  = r2f(1.0 / 64.0);
    rin = R - 1 + K; cin = C - 1 + K;
    for (int b = 0; b < B; b++) for (int n = 0; n < N; n++)
      for (int y = 0; y < rin; y++) for (int x = 0; x < cin; x++)
        mem.mem[fm(IB, N, rin, cin, b, n, y, x)] = rnd64();
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
        mem.mem[fm(LB, M, R, C, b, m, r, c)] = rnd64();
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        mem.mem[wa(WB, N, K, m, n, i, j)] = rnd64();
    l = '0;
    l.op = OP_CONV_WU; l.m = 16'(M); l.n = 16'(N); l.r = 16'(R); l.c = 16'(C);
    l.k = 4'(K); l.s = 3'd1; l.tr = 16'(TR); l.m_on = 16'(MON); l.b = 16'(B); l.lr = lr;
    l.ifm_base = IB; l.ofm_base = LB; l.wei_base = WB; l.out_base = OB;
    run(l);
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        acc = 0.0;
        for (int b = 0; b < B; b++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
          acc += f2r(mem.mem[fm(LB, M, R, C, b, m, r, c)])
               * f2r(mem.mem[fm(IB, N, rin, cin, b, n, r + i, c + j)]);
        check("wu weight", mem.mem[wa(OB, N, K, m, n, i, j)],
              f2r(mem.mem[wa(WB, N, K, m, n, i, j)]) - f2r(r2f(acc / 64.0)));
      end
    checks++;
    if (kcycles != B * (M / T) * (N / T) * R * C * K * K) begin
      failures++; $display("FAIL wu compute cycles %0d", kcycles);
    end
    $display("failures so far %0d", failures);
    $display("WU: %0d compute cycles, %0d weight tile fetches", kcycles, wei_cmds);
  endtask

  initial begin
    start = 1'b0;
    cfg   = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    test_fp(16, 16, 5, 4, 3, 1, 2, 8, 2, 1'b1);
    test_fp(8, 8, 3, 3, 3, 2, 3, 8, 1, 1'b0);
    test_bp(16, 8, 4, 3, 3, 3, 1);
    test_wu(16, 8, 4, 4, 3, 2, 8, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
