// tb_im2col_unit: self-checking test of one IM2COL unit (input controller,
// four patch units on a ring, output controller) at its default size.
//
// The testbench models the ifmap SRAM (one read per cycle, data one cycle
// after the address) and the patch buffer (one write port per column). At
// every commit it compares the NPU columns written for the group with the
// IM2COL matrix computed here from the ifmap: column j of group (row, xbase)
// must hold, at row k = (ch*K + ky)*K + kx, ifmap[ch][row*S+ky][(xbase+j)*S+kx].
// Layers cover overlapping patches (neighbour forwarding, ring wrap,
// reserved-buffer reuse), a reserve too small to be used (refetch), stride
// equal to the kernel (PU bypass), a 1x1 kernel, multi-array mode (unit 1 of
// 2, which must build only its own groups) and max pooling. The patch buffer
// bank is released after a random delay to exercise the wait on a free bank.
// It also counts how often each mechanism happened and fails if one never did.
`timescale 1ns/1ps
module tb_im2col_unit;
  import spots_pkg::*;
  localparam int NPU = 4, FA = 18;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic [2:0] unit_id, n_units;
  logic start, done, rd_en, bank_free, commit;
  logic [FA-1:0] rd_addr;
  data_t rd_data;
  logic [NPU-1:0] wr_en, pool_valid;
  logic [RW-1:0] wr_k [NPU];
  data_t wr_data [NPU], pool_value [NPU];
  logic [CHW-1:0] pool_ch [NPU];
  logic [CW-1:0] pool_row, pool_col [NPU];

  im2col_unit dut (.*);

  int checks = 0, failures = 0;
  int n_nbr = 0, n_res = 0, n_wrap = 0, n_byp = 0, n_commit = 0, n_pool = 0, n_refetch = 0;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int K, S, C, H, W, HO, WO;
  data_t ifm [1 << FA];

  // ifmap SRAM
  always @(posedge clk) rd_data <= ifm[rd_addr];

  // patch buffer model
  int col [NPU][int];
  always @(posedge clk) begin
    for (int j = 0; j < NPU; j++) if (wr_en[j]) col[j][int'(wr_k[j])] = int'(wr_data[j]);
  end

  // mechanism counters
  for (genvar p = 0; p < NPU; p++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      if (dut.g_pu[p].u_pu.took_nbr) n_nbr++;
      if (dut.g_pu[p].u_pu.took_res) n_res++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.g_pu[0].u_pu.took_nbr) n_wrap++;
    if (dut.u_in.byp_valid) n_byp++;
  end

  // bank handshake and group check at each commit
  int errs = 0;
  int grp_seen [int];
  always @(posedge clk) if (rst_n && commit) begin
    int row, xb;
    row = int'(dut.grp_row); xb = int'(dut.grp_xbase);
    n_commit++;
    grp_seen[row * 1024 + xb] = 1;
    checks++;
    if ((xb / NPU) % int'(n_units) != int'(unit_id)) begin
      failures++; $display("group xbase %0d built by unit %0d", xb, unit_id);
    end
    for (int j = 0; j < NPU; j++) begin
      if (xb + j < WO) begin
        for (int c = 0; c < C; c++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              int k, e;
              k = (c * K + ky) * K + kx;
              e = int'(ifm[(c * H + row * S + ky) * W + (xb + j) * S + kx]);
              checks++;
              if (!col[j].exists(k) || col[j][k] != e) begin
                failures++;
                if (errs++ < 10)
                  $display("row %0d xb %0d col %0d k %0d got %0d exp %0d", row, xb, j, k,
                           col[j].exists(k) ? col[j][k] : -99999, e);
              end
            end
      end
      col[j].delete();
    end
    // hold the bank busy for a few cycles, as the GEMM side would
    bank_free <= 1'b0;
    fork begin
      repeat ($urandom_range(12)) @(posedge clk);
      bank_free <= 1'b1;
    end join_none
  end

  int pool_got [int];
  always @(posedge clk) if (rst_n)
    for (int j = 0; j < NPU; j++)
      if (pool_valid[j]) begin
        pool_got[(int'(pool_ch[j]) * 512 + int'(pool_row)) * 512 + int'(pool_col[j])] = int'(pool_value[j]);
        n_pool++;
      end

  task automatic setup(int k_, int s_, int c_, int h_, int w_, bit pool, int uid, int nu);
    K = k_; S = s_; C = c_; H = h_; W = w_;
    HO = (H - K) / S + 1; WO = (W - K) / S + 1;
    for (int i = 0; i < C * H * W; i++) ifm[i] = data_t'(int'($urandom_range(2000)) - 1000);
    cfg = '0;
    cfg.k = KW'(K); cfg.s = KW'(S); cfg.c = CHW'(C); cfg.h = CW'(H); cfg.w = CW'(W);
    cfg.hout = CW'(HO); cfg.wout = CW'(WO); cfg.f = FW'(1);
    cfg.tall_mode = (nu == 1); cfg.pool_mode = pool;
    unit_id = 3'(uid); n_units = 3'(nu);
    grp_seen.delete(); pool_got.delete();
  endtask

  task automatic run_layer(string name);
    int cy;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cy = 0;
    while (!done) begin @(negedge clk); cy++; end
    $display("%s: K=%0d S=%0d C=%0d %0dx%0d units=%0d: %0d cycles", name, K, S, C, H, W,
             n_units, cy);
  endtask

  // every group of this unit must have been committed
  task automatic check_groups(string name);
    int ng;
    ng = (WO + NPU - 1) / NPU;
    for (int r = 0; r < HO; r++)
      for (int g = 0; g < ng; g++)
        if (g % int'(n_units) == int'(unit_id)) begin
          checks++;
          if (!grp_seen.exists(r * 1024 + g * NPU)) begin
            failures++; $display("%s: group row %0d xbase %0d never committed", name, r, g * NPU);
          end
        end
  endtask

  task automatic check_pool(string name);
    for (int c = 0; c < C; c++)
      for (int oy = 0; oy < HO; oy++)
        for (int ox = 0; ox < WO; ox++) begin
          int mx, key;
          mx = -32768;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              if (int'(ifm[(c * H + oy * S + ky) * W + ox * S + kx]) > mx)
                mx = int'(ifm[(c * H + oy * S + ky) * W + ox * S + kx]);
          key = (c * 512 + oy) * 512 + ox;
          checks++;
          if (!pool_got.exists(key) || pool_got[key] != mx) begin
            failures++;
            if (errs++ < 10)
              $display("%s: pool c=%0d y=%0d x=%0d got %0d exp %0d", name, c, oy, ox,
                       pool_got.exists(key) ? pool_got[key] : -99999, mx);
          end
        end
  endtask

  task automatic conv(string name, int k_, int s_, int c_, int h_, int w_, int uid, int nu);
    setup(k_, s_, c_, h_, w_, 1'b0, uid, nu);
    run_layer(name);
    check_groups(name);
  endtask

  task automatic pool(string name, int k_, int s_, int c_, int h_, int w_);
    setup(k_, s_, c_, h_, w_, 1'b1, 0, 1);
    run_layer(name);
    check_pool(name);
  endtask

  task automatic expect_seen(string what, int n);
    $display("  %-28s %0d", what, n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism %s never happened", what); end
  endtask

  initial begin
    int res_before;
    start = 0; bank_free = 1; cfg = '0; unit_id = 0; n_units = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    conv("overlap", 3, 1, 2, 7, 9, 0, 1);
    conv("stride2", 3, 2, 3, 9, 11, 0, 1);
    conv("bypass", 2, 2, 2, 6, 8, 0, 1);
    conv("1x1", 1, 1, 4, 3, 5, 0, 1);
    conv("multi", 3, 1, 2, 6, 14, 1, 2);
    // reserve of 2*groups*C*K*(K-S) words exceeds R_DEPTH: the rows above are fetched again
    res_before = n_res;
    conv("refetch", 3, 1, 360, 4, 6, 0, 1);
    if (n_res == res_before) n_refetch++;
    pool("pool3s2", 3, 2, 2, 7, 9);
    pool("pool2s2", 2, 2, 3, 6, 8);
    expect_seen("neighbour forwarding", n_nbr);
    expect_seen("ring wrap (last PU to first)", n_wrap);
    expect_seen("reserved-buffer reuse", n_res);
    expect_seen("refetch, reserve too small", n_refetch);
    expect_seen("PU bypass", n_byp);
    expect_seen("group commits", n_commit);
    expect_seen("max pooling", n_pool);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
