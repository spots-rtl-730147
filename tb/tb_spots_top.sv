// tb_spots_top: end-to-end test of the SPOTS accelerator at its default size
// (128 x 4 PEs, four IM2COL units of four PUs, full-size SRAMs).
//
// The testbench generates small convolution layers with group-wise pruned
// filters (whole blocks and whole filter columns zero) and feature maps with
// zero regions, encodes the filters in the A/M1/M2 sparse format, loads all
// SRAMs through the host ports, runs the layer and compares every output
// element with a direct convolution computed here (24-bit wrap-around sums).
// Layers cover: overlapping patches in tall mode (ring forwarding, ring wrap
// from the last PU to the first, reserved-buffer reuse), stride = kernel
// (PU bypass) with two accumulator passes, the multi-array mode with four
// IM2COL units, and max pooling with and without overlap. It counts how
// often each mechanism happened and fails any that never did. A watchdog
// ends the run after a fixed number of cycles.
`timescale 1ns/1ps
module tb_spots_top;
  import spots_pkg::*;

  localparam int M = 128, N = 4, NSUB = 4, G = 8, NB = M / G;
  localparam int A_DEPTH = 4096, KR_MAX = 4608, OF_DEPTH = 1024;
  localparam int WATCHDOG = 3_000_000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, done;
  logic fmap_we; logic [17:0] fmap_waddr; data_t fmap_wdata;
  logic a_we; logic [$clog2(NB)-1:0] a_bank; logic [11:0] a_waddr; logic [G*DW-1:0] a_wdata;
  logic m1_we; logic [12:0] m1_waddr; logic m1_wdata;
  logic m2_we; logic [12:0] m2_waddr; logic [NB*PASSES-1:0] m2_wdata;
  logic [9:0] of_raddr; logic [M*AW-1:0] of_rdata;
  logic [N-1:0] pool_valid [NSUB];
  data_t pool_value [NSUB][N];
  logic [CHW-1:0] pool_ch [NSUB][N];
  logic [CW-1:0] pool_row [NSUB];
  logic [CW-1:0] pool_col [NSUB][N];
  logic ev_skip_col, ev_skip_row, ev_stall;

  spots_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  // mechanism counters
  int n_ring = 0, n_wrap = 0, n_res = 0, n_bypass = 0, n_skip_col = 0, n_skip_row = 0;
  int n_stall = 0, n_gated = 0, n_multi = 0, n_pool = 0, n_overlap = 0, n_tiles = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.g_unit[0].u_im2col.g_pu[1].u_pu.took_nbr) n_ring++;
      if (dut.g_unit[0].u_im2col.g_pu[0].u_pu.took_nbr) n_wrap++;
      if (dut.g_unit[0].u_im2col.g_pu[0].u_pu.took_res) n_res++;
      if (dut.g_unit[0].u_im2col.u_in.byp_valid) n_bypass++;
      if (ev_skip_col) n_skip_col++;
      if (ev_skip_row) n_skip_row++;
      if (ev_stall) n_stall++;
      if (dut.u_sa.macs_gated != 0) n_gated++;
      if (dut.u_commit[1] || dut.u_commit[2]) n_multi++;
      if (dut.g_unit[0].wr_en != 0 && dut.push) n_overlap++;
      if (dut.drain_done) n_tiles++;
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- layer data ----------------
  int K, S, C, H, W, F, HO, WO;
  int ifm [];        // [c][y][x]
  int wt [];         // [f][k], k = (c*K+ky)*K+kx

  function automatic int rnd_val(int zero_pct);
    int v;
    if (int'($urandom_range(99)) < zero_pct) return 0;
    v = int'($urandom_range(15)) - 7;
    return (v == 0) ? 1 : v;
  endfunction

  task automatic make_layer(int k_, int s_, int c_, int h_, int w_, int f_, bit tall);
    int kr, rows;
    K = k_; S = s_; C = c_; H = h_; W = w_; F = f_;
    HO = (H - K) / S + 1; WO = (W - K) / S + 1;
    kr = K * K * C;
    ifm = new[C * H * W];
    wt  = new[F * kr];
    // feature map: random with a zero band (rows 0..1 of channel 0 and all
    // of the last channel's right half) so some IM2COL rows are all zero
    foreach (ifm[i]) ifm[i] = rnd_val(30);
    for (int x = 0; x < W; x++) begin
      ifm[(0 * H + 0) * W + x] = 0;
      if (H > 1) ifm[(0 * H + 1) * W + x] = 0;
    end
    // filters: group-wise pruning in blocks of G filters; every third
    // column entirely zero
    rows = tall ? M : M / NSUB;
    foreach (wt[i]) wt[i] = rnd_val(20);
    for (int k = 0; k < kr; k++) begin
      for (int p = 0; p < PASSES; p++)
        for (int b = 0; b < rows / G; b++)
          if (k % 3 == 0 || ((k + b + p) % 4 == 1))
            for (int e = 0; e < G; e++) begin
              int f;
              f = p * rows + b * G + e;
              if (f < F) wt[f * kr + k] = 0;
            end
    end
  endtask

  task automatic host_load(bit tall, bit pool);
    int kr, rows, ord;
    int ptr [NB];
    kr   = K * K * C;
    rows = tall ? M : M / NSUB;
    cfg = '0;
    cfg.k = KW'(K); cfg.s = KW'(S); cfg.c = CHW'(C); cfg.h = CW'(H); cfg.w = CW'(W);
    cfg.hout = CW'(HO); cfg.wout = CW'(WO); cfg.f = FW'(F);
    cfg.tall_mode = tall; cfg.pool_mode = pool;
    // ifmap
    foreach (ifm[i]) begin
      @(negedge clk);
      fmap_we = 1'b1; fmap_waddr = 18'(i); fmap_wdata = data_t'(ifm[i]);
    end
    @(negedge clk); fmap_we = 1'b0;
    if (pool) return;
    // sparse filter format
    foreach (ptr[b]) ptr[b] = 0;
    ord = 0;
    for (int k = 0; k < kr; k++) begin
      bit colnz;
      logic [NB*PASSES-1:0] m2;
      colnz = 1'b0;
      m2 = '0;
      for (int f = 0; f < F; f++) if (wt[f * kr + k] != 0) colnz = 1'b1;
      @(negedge clk);
      m1_we = 1'b1; m1_waddr = 13'(k); m1_wdata = colnz;
      @(negedge clk); m1_we = 1'b0;
      if (!colnz) continue;
      for (int p = 0; p < PASSES; p++)
        for (int b = 0; b < rows / G; b++) begin
          logic [G*DW-1:0] blk;
          bit nz;
          blk = '0; nz = 1'b0;
          for (int e = 0; e < G; e++) begin
            int f;
            f = p * rows + b * G + e;
            if (f < F && wt[f * kr + k] != 0) begin
              nz = 1'b1;
              blk[e*DW +: DW] = DW'(wt[f * kr + k]);
            end
          end
          if (nz) begin
            m2[b*PASSES + p] = 1'b1;
            @(negedge clk);
            a_we = 1'b1; a_bank = $clog2(NB)'(b); a_waddr = 12'(ptr[b]); a_wdata = blk;
            ptr[b]++;
            @(negedge clk); a_we = 1'b0;
          end
        end
      @(negedge clk);
      m2_we = 1'b1; m2_waddr = 13'(ord); m2_wdata = m2;
      @(negedge clk); m2_we = 1'b0;
      ord++;
    end
  endtask

  task automatic run_layer(output longint cycles);
    longint t0;
    @(negedge clk); start = 1'b1; t0 = cyc;
    @(negedge clk); start = 1'b0;
    @(negedge clk);
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  function automatic int ref_out(int f, int oy, int ox);
    int acc;
    acc = 0;
    for (int c = 0; c < C; c++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++)
          acc += wt[f * K * K * C + (c * K + ky) * K + kx] * ifm[(c * H + oy * S + ky) * W + ox * S + kx];
    return acc;
  endfunction

  task automatic check_gemm(bit tall, string name);
    int rows, units, ngroups, lgc, ntiles, errs;
    rows    = tall ? M : M / NSUB;
    units   = tall ? 1 : NSUB;
    ngroups = (WO + N - 1) / N;
    lgc     = (ngroups + units - 1) / units;
    ntiles  = HO * lgc;
    errs    = 0;
    for (int t = 0; t < ntiles; t++)
      for (int j = 0; j < N; j++)
        for (int p = 0; p < PASSES; p++) begin
          @(negedge clk);
          of_raddr = 10'(((t * N + j) * PASSES + p) % OF_DEPTH);
          #1;
          for (int r = 0; r < M; r++) begin
            int s, g, x, y, f;
            logic [AW-1:0] got, exp;
            s = r / rows;
            if (s >= units) continue;
            g = (t % lgc) * units + s;
            x = g * N + j;
            y = t / lgc;
            f = p * rows + (r % rows);
            if (x >= WO || f >= F) continue;
            got = of_rdata[r*AW +: AW];
            exp = AW'(ref_out(f, y, x));
            checks++;
            if (got !== exp) begin
              failures++;
              if (errs++ < 8)
                $display("%s: out f=%0d y=%0d x=%0d got %0d exp %0d", name, f, y, x,
                         $signed(got), $signed(exp));
            end
          end
        end
  endtask

  // pooling results collected from the pool ports
  int pool_got [int];
  always @(posedge clk) begin
    for (int u = 0; u < NSUB; u++)
      for (int j = 0; j < N; j++)
        if (pool_valid[u][j]) begin
          pool_got[(int'(pool_ch[u][j]) * 512 + int'(pool_row[u])) * 512 + int'(pool_col[u][j])]
            = int'(pool_value[u][j]);
          n_pool++;
        end
  end

  task automatic check_pool(string name);
    int errs;
    errs = 0;
    for (int c = 0; c < C; c++)
      for (int oy = 0; oy < HO; oy++)
        for (int ox = 0; ox < WO; ox++) begin
          int mx, key;
          mx = -32768;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              if (ifm[(c * H + oy * S + ky) * W + ox * S + kx] > mx)
                mx = ifm[(c * H + oy * S + ky) * W + ox * S + kx];
          key = (c * 512 + oy) * 512 + ox;
          checks++;
          if (!pool_got.exists(key) || pool_got[key] != mx) begin
            failures++;
            if (errs++ < 8)
              $display("%s: pool c=%0d y=%0d x=%0d got %0d exp %0d", name, c, oy, ox,
                       pool_got.exists(key) ? pool_got[key] : -99999, mx);
          end
        end
  endtask

  task automatic do_gemm_layer(string name, int k_, int s_, int c_, int h_, int w_, int f_, bit tall);
    longint cy;
    make_layer(k_, s_, c_, h_, w_, f_, tall);
    host_load(tall, 1'b0);
    run_layer(cy);
    $display("%s: K=%0d S=%0d C=%0d %0dx%0d F=%0d %s: %0d cycles", name, K, S, C, H, W, F,
             tall ? "tall" : "multi", cy);
    check_gemm(tall, name);
  endtask

  task automatic do_pool_layer(string name, int k_, int s_, int c_, int h_, int w_);
    longint cy;
    make_layer(k_, s_, c_, h_, w_, 1, 1'b1);
    pool_got.delete();
    host_load(1'b1, 1'b1);
    run_layer(cy);
    repeat (3) @(negedge clk);
    $display("%s: pool K=%0d S=%0d C=%0d %0dx%0d: %0d cycles", name, K, S, C, H, W, cy);
    check_pool(name);
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    $display("  mechanism %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("  mechanism %s never happened", what);
    end
  endtask

  initial begin
    start = 0; fmap_we = 0; a_we = 0; m1_we = 0; m2_we = 0; of_raddr = '0; cfg = '0;
    fmap_waddr = '0; fmap_wdata = '0; a_bank = '0; a_waddr = '0; a_wdata = '0;
    m1_waddr = '0; m1_wdata = 0; m2_waddr = '0; m2_wdata = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    do_gemm_layer("L1", 3, 1, 2, 7, 7, 20, 1'b1);     // overlap, ring, wrap, reserve
    do_gemm_layer("L2", 2, 2, 3, 6, 6, 140, 1'b1);    // bypass, two passes
    do_gemm_layer("L3", 3, 1, 2, 4, 12, 40, 1'b0);    // four 32x4 arrays
    do_pool_layer("P1", 2, 2, 2, 6, 6);               // pooling through bypass
    do_pool_layer("P2", 3, 2, 2, 7, 9);               // pooling through PUs

    $display("mechanisms:");
    expect_seen("ring forwarding", n_ring);
    expect_seen("ring wrap (last PU to first)", n_wrap);
    expect_seen("reserved-buffer reuse", n_res);
    expect_seen("PU bypass", n_bypass);
    expect_seen("zero filter column skipped", n_skip_col);
    expect_seen("zero IM2COL row skipped", n_skip_row);
    $display("  array edge stalls (not required) %0d", n_stall);
    expect_seen("MAC gated on zero", n_gated);
    expect_seen("multi-array mode", n_multi);
    expect_seen("max pooling", n_pool);
    expect_seen("IM2COL/GEMM overlap", n_overlap);
    expect_seen("tiles drained", n_tiles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
