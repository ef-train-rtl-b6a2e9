// tb_ef_train_top -- end-to-end training step through ef_train_top with the
// DRAM/DMA model: a Conv layer (FP with ReLU), max pooling and batch
// normalization forward, then BN BP, pooling BP, Conv BP (transposed and
// flipped weights, ReLU mask) and Conv WU (gradient over the mini-batch and
// SGD update). Each layer's output is compared with a double-precision
// reference computed here from the words the layer read from DRAM (relative
// tolerance 1e-4). The testbench also counts every mechanism and fails if
// one never happens: weight reuse (one weight fetch per tile for the whole
// batch), M_on output groups (the IFM is fetched again for each group), ReLU
// zeroing, ReLU masking in BP, pooling-index routing, kernel mode switches,
// output back-pressure, DMA burst restarts, and the compute-cycle count of
// the FP layer (B*(M/T)*(N/T)*R*C*K*K, one T x T MAC array step per cycle).
// Small sizes (T = 8) keep the run short; the host steps of padding the loss
// map for Conv BP are done here, as the paper leaves them to the host.
module tb_ef_train_top;
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

  ef_train_top #(.T(T), .P(P), .IFM_DEPTH(512), .OFM_DEPTH(256), .WEI_DEPTH(64),
                 .POOL_ROW(64), .BN_MAXM(32)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .rd_cmd_valid(rcv), .rd_cmd(rc), .rd_cmd_ready(rcr), .rd_valid(rv), .rd_data(rd),
    .rd_ready(rr), .wr_cmd_valid(wcv), .wr_cmd(wc), .wr_cmd_ready(wcr), .wr_valid(wv),
    .wr_data(wd), .wr_ready(wr), .conv_kernel_busy(kbusy));

  tb_dram_dma #(.P(P), .WORDS(1 << 17), .TSTART(20)) mem (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd(rc), .rd_cmd_ready(rcr),
    .rd_valid(rv), .rd_data(rd), .rd_ready(rr), .wr_cmd_valid(wcv),
    .wr_cmd(wc), .wr_cmd_ready(wcr), .wr_valid(wv), .wr_data(wd), .wr_ready(wr));

  int checks = 0, failures = 0;
  int kcycles, wei_cmds, ifm_cmds, stall_cycles, mode_switches, relu_zeros, mask_zeros, route_zeros;
  op_e last_op;
  always @(posedge clk) begin
    if (kbusy) kcycles++;
    if (rcv[2] && rcr[2]) wei_cmds++;
    if (rcv[0] && rcr[0]) ifm_cmds++;
    if (wv && !wr) stall_cycles++;
  end

  initial begin
    #50000000;
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
  function automatic real v(int a);
    return f2r(mem.mem[a]);
  endfunction

  task automatic run(input layer_cfg_t l);
    int t;
    cfg = l;
    if (l.op != last_op) mode_switches++;
    last_op = l.op;
    kcycles = 0; wei_cmds = 0; ifm_cmds = 0;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    t = 0;
    while (!done && t < 2000000) begin @(posedge clk); t++; end
    checks++;
    if (!done) begin failures++; $display("FAIL: layer op %0d did not finish", l.op); end
    $display("layer op %0d done after %0d cycles", l.op, t);
  endtask

  task automatic check(input string what, input int a, input real exp);
    real g, tol;
    checks++;
    g = v(a);
    tol = 1e-4 * ((exp < 0.0 ? -exp : exp) + 1e-2);
    if (g - exp > tol || exp - g > tol) begin
      failures++;
      if (failures < 12) $display("FAIL %s got %f exp %f", what, g, exp);
    end
  endtask

  task automatic mech(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL mechanism: %s", what); end
  endtask

  // layer sizes
  localparam int B = 2, N = 8, M = 16, R = 4, C = 4, K = 3, RP = R + K - 1, CP = C + K - 1;
  localparam int RO = R / 2, CO = C / 2;
  // DRAM map (word addresses)
  localparam int A0 = 0, A0U = 4096, W = 8192, A1 = 12288, A2 = 16384, X2 = 20480,
                 P3 = 24576, A3 = 28672, H3 = 32768, Q3 = 36864, G3 = 40960, G2 = 45056,
                 U3 = 49152, G1 = 53248, G1P = 57344, G0 = 61440, W2 = 65536;

  initial begin
    layer_cfg_t l;
    real acc, mean [M], var_ [M], lam [M], dg [M], db [M];
    int nn;
    start = 1'b0; cfg = '0; last_op = OP_CONV_FP;
    mode_switches = 0; stall_cycles = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // input (pre-padded) and weights
    for (int b = 0; b < B; b++) for (int n = 0; n < N; n++)
      for (int y = 0; y < RP; y++) for (int x = 0; x < CP; x++)
        mem.mem[fm(A0, N, RP, CP, b, n, y, x)] =
          (y == 0 || x == 0 || y == RP - 1 || x == CP - 1) ? FP_ZERO : rnd64();
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        mem.mem[wa(W, N, K, m, n, i, j)] = rnd64();

    // ---- Conv FP with ReLU, two M_on groups, two row tiles
    l = '0;
    l.op = OP_CONV_FP; l.m = 16'(M); l.n = 16'(N); l.r = 16'(R); l.c = 16'(C);
    l.k = 4'(K); l.s = 3'd1; l.tr = 16'd2; l.m_on = 16'(T); l.b = 16'(B); l.relu = 1'b1;
    l.ifm_base = A0; l.wei_base = W; l.out_base = A1;
    run(l);
    relu_zeros = 0;
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        acc = 0.0;
        for (int n = 0; n < N; n++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
          acc += v(fm(A0, N, RP, CP, b, n, r + i, c + j)) * v(wa(W, N, K, m, n, i, j));
        if (acc < 0.0) begin acc = 0.0; relu_zeros++; end
        check("conv fp", fm(A1, M, R, C, b, m, r, c), acc);
      end
    mech("FP compute cycles = B*(M/T)*(N/T)*R*C*K*K", kcycles == B * (M / T) * (N / T) * R * C * K * K);
    mech("weight reuse: one fetch per weight tile for the batch", wei_cmds == (M / T) * (N / T));
    mech("M_on groups: IFM fetched once per group, image, row tile", ifm_cmds == 2 * B * 2);
    mech("ReLU zeroing", relu_zeros > 0);
    $display("conv FP: %0d cycles of the MAC array, %0d weight fetches, %0d IFM fetches, %0d ReLU zeros",
             kcycles, wei_cmds, ifm_cmds, relu_zeros);

    // ---- max pooling FP
    l = '0;
    l.op = OP_POOL_FP; l.m = 16'(M); l.r = 16'(RO); l.c = 16'(CO); l.b = 16'(B);
    l.ifm_base = A1; l.out_base = A2; l.aux_base = X2;
    run(l);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int r = 0; r < RO; r++) for (int c = 0; c < CO; c++) begin
        real mx;
        int  bi;
        mx = -10.0; bi = 0;
        for (int k = 0; k < 4; k++)
          if (v(fm(A1, M, R, C, b, m, 2 * r + k / 2, 2 * c + k % 2)) > mx) begin
            mx = v(fm(A1, M, R, C, b, m, 2 * r + k / 2, 2 * c + k % 2)); bi = k;
          end
        check("pool fp", fm(A2, M, RO, CO, b, m, r, c), mx);
        // ties (e.g. all-zero windows after ReLU) may pick any maximal index
        checks++;
        if (v(fm(A1, M, R, C, b, m, 2 * r + mem.mem[fm(X2, M, RO, CO, b, m, r, c)] / 2,
                 2 * c + mem.mem[fm(X2, M, RO, CO, b, m, r, c)] % 2)) != mx) begin
          failures++; $display("FAIL pool index does not point at the maximum");
        end
      end

    // ---- BN FP
    for (int m = 0; m < M; m++) begin
      mem.mem[P3 + m]     = r2f(real'($urandom_range(64, 16)) / 32.0);
      mem.mem[P3 + M + m] = r2f(real'($urandom_range(64, 0)) / 32.0 - 1.0);
    end
    nn = B * RO * CO;
    for (int m = 0; m < M; m++) begin
      mean[m] = 0.0; var_[m] = 0.0;
      for (int b = 0; b < B; b++) for (int y = 0; y < RO; y++) for (int x = 0; x < CO; x++) begin
        mean[m] += v(fm(A2, M, RO, CO, b, m, y, x));
        var_[m] += v(fm(A2, M, RO, CO, b, m, y, x)) ** 2;
      end
      mean[m] /= nn;
      var_[m] = var_[m] / nn - mean[m] * mean[m];
      lam[m] = 1.0 / $sqrt(var_[m] + 1e-5);
    end
    l = '0;
    l.op = OP_BN_FP; l.m = 16'(M); l.r = 16'(RO); l.c = 16'(CO); l.b = 16'(B);
    l.ifm_base = A2; l.wei_base = P3; l.out_base = A3; l.aux_base = H3; l.ofm_base = Q3;
    run(l);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < RO; y++) for (int x = 0; x < CO; x++) begin
        real ah;
        ah = (v(fm(A2, M, RO, CO, b, m, y, x)) - mean[m]) * lam[m];
        check("bn a_hat", fm(H3, M, RO, CO, b, m, y, x), ah);
        check("bn a_out", fm(A3, M, RO, CO, b, m, y, x), ah * v(P3 + m) + v(P3 + M + m));
      end

    // ---- backward: loss at the BN output
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < RO; y++) for (int x = 0; x < CO; x++)
        mem.mem[fm(G3, M, RO, CO, b, m, y, x)] = rnd64();
    for (int m = 0; m < M; m++) begin
      dg[m] = 0.0; db[m] = 0.0;
      for (int b = 0; b < B; b++) for (int y = 0; y < RO; y++) for (int x = 0; x < CO; x++) begin
        dg[m] += v(fm(G3, M, RO, CO, b, m, y, x)) * v(fm(H3, M, RO, CO, b, m, y, x));
        db[m] += v(fm(G3, M, RO, CO, b, m, y, x));
      end
    end
    l = '0;
    l.op = OP_BN_BP; l.m = 16'(M); l.r = 16'(RO); l.c = 16'(CO); l.b = 16'(B);
    l.ifm_base = H3; l.ofm_base = G3; l.wei_base = Q3; l.out_base = G2; l.aux_base = U3;
    l.lr = r2f(0.125);
    run(l);
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < RO; y++) for (int x = 0; x < CO; x++)
        check("bn bp", fm(G2, M, RO, CO, b, m, y, x),
              v(Q3 + m) * v(Q3 + 2 * M + m) * (v(fm(G3, M, RO, CO, b, m, y, x)) - db[m] / nn
              - v(fm(H3, M, RO, CO, b, m, y, x)) * dg[m] / nn));
    for (int m = 0; m < M; m++) begin
      check("gamma upd", U3 + m, v(Q3 + m) - 0.125 * dg[m]);
      check("beta upd", U3 + M + m, v(Q3 + M + m) - 0.125 * db[m]);
    end

    // ---- pooling BP
    l = '0;
    l.op = OP_POOL_BP; l.m = 16'(M); l.r = 16'(RO); l.c = 16'(CO); l.b = 16'(B);
    l.ifm_base = G2; l.wei_base = X2; l.out_base = G1;
    run(l);
    route_zeros = 0;
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < R; y++) for (int x = 0; x < C; x++) begin
        bit hit;
        hit = (mem.mem[fm(X2, M, RO, CO, b, m, y / 2, x / 2)] == 32'((y % 2) * 2 + x % 2));
        if (!hit) route_zeros++;
        check("pool bp", fm(G1, M, R, C, b, m, y, x), hit ? v(fm(G2, M, RO, CO, b, m, y / 2, x / 2)) : 0.0);
      end
    mech("pooling index routes the loss", route_zeros == B * M * R * C * 3 / 4);

    // ---- Conv BP: host pads the loss; ReLU mask from the layer input
    for (int b = 0; b < B; b++) for (int m = 0; m < M; m++)
      for (int y = 0; y < RP; y++) for (int x = 0; x < CP; x++)
        mem.mem[fm(G1P, M, RP, CP, b, m, y, x)] =
          (y == 0 || x == 0 || y == RP - 1 || x == CP - 1) ? FP_ZERO
                                                           : mem.mem[fm(G1, M, R, C, b, m, y - 1, x - 1)];
    for (int b = 0; b < B; b++) for (int n = 0; n < N; n++)
      for (int y = 0; y < R; y++) for (int x = 0; x < C; x++)
        mem.mem[fm(A0U, N, R, C, b, n, y, x)] = mem.mem[fm(A0, N, RP, CP, b, n, y + 1, x + 1)];
    l = '0;
    l.op = OP_CONV_BP; l.m = 16'(N); l.n = 16'(M); l.r = 16'(R); l.c = 16'(C);
    l.k = 4'(K); l.s = 3'd1; l.tr = 16'(R); l.m_on = 16'(N); l.b = 16'(B); l.relu = 1'b1;
    l.ifm_base = G1P; l.wei_base = W; l.ofm_base = A0U; l.out_base = G0;
    run(l);
    mask_zeros = 0;
    for (int b = 0; b < B; b++) for (int n = 0; n < N; n++)
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        acc = 0.0;
        for (int m = 0; m < M; m++) for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
          acc += v(fm(G1P, M, RP, CP, b, m, r + i, c + j)) * v(wa(W, N, K, m, n, K - 1 - i, K - 1 - j));
        if (!(v(fm(A0U, N, R, C, b, n, r, c)) > 0.0)) begin
          if (acc != 0.0) mask_zeros++;
          acc = 0.0;
        end
        check("conv bp", fm(G0, N, R, C, b, n, r, c), acc);
      end
    mech("ReLU mask in BP", mask_zeros > 0);
    mech("BP weight fetches (transposed tiles)", wei_cmds == (M / T) * (N / T));

    // ---- Conv WU with the loss of the Conv output
    l = '0;
    l.op = OP_CONV_WU; l.m = 16'(M); l.n = 16'(N); l.r = 16'(R); l.c = 16'(C);
    l.k = 4'(K); l.s = 3'd1; l.tr = 16'd2; l.m_on = 16'(T); l.b = 16'(B); l.lr = r2f(1.0 / 64.0);
    l.ifm_base = A0; l.ofm_base = G1; l.wei_base = W; l.out_base = W2;
    run(l);
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        acc = 0.0;
        for (int b = 0; b < B; b++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
          acc += v(fm(G1, M, R, C, b, m, r, c)) * v(fm(A0, N, RP, CP, b, n, r + i, c + j));
        check("wu", wa(W2, N, K, m, n, i, j), v(wa(W, N, K, m, n, i, j)) - acc / 64.0);
      end
    mech("WU compute cycles = B*(M/T)*(N/T)*R*C*K*K", kcycles == B * (M / T) * (N / T) * R * C * K * K);

    mech("mode switches between FP, BP, WU, pooling and BN", mode_switches == 6);
    mech("output back-pressure", stall_cycles > 0);
    mech("DMA burst restarts", mem.restarts[0] > 0 && mem.restarts[3] > 0);
    $display("mode switches %0d, output stall cycles %0d, restarts ifm %0d out %0d, mask zeros %0d",
             mode_switches, stall_cycles, mem.restarts[0], mem.restarts[3], mask_zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
