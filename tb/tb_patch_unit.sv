// tb_patch_unit: self-checking test of one patch unit at its default size.
//
// The testbench plays the input controller and both neighbours. For each
// patch it feeds the new buffer with exactly the elements the PU takes from
// it (spots_pkg::pos_src), feeds the neighbour buffer with what a left PU
// forwarded, and checks that the PU emits the patch in order (IM2COL row
// k = 0 .. C*K*K-1 with the right ifmap value), forwards exactly the
// elements with kx >= S, and reuses from its reserved buffer the rows it
// kept from the patch above. Random stalls on the output and forward
// handshakes are applied. Sequence per layer:
//   A: patch (0,0), no left / up neighbour, has right and down;
//   B: patch one stride below A, same PU, top K-S rows from the reserve;
//   C: patch one stride right of A, left columns from A's forwarded elements.
`timescale 1ns/1ps
module tb_patch_unit;
  import spots_pkg::*;
  localparam int RD = 4096, ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [KW-1:0] k, s; logic [CHW-1:0] c;
  logic start, has_left, has_right, has_up, has_down, busy;
  logic [CW-1:0] px, py;
  logic [$clog2(RD)-1:0] r_rd_base, r_wr_base;
  logic n_push, g_push, g_ready, fwd_valid, fwd_ready, out_valid, out_ready;
  logic took_new, took_nbr, took_res;
  elem_t n_data, g_data, fwd_data;
  logic [$clog2(ND+1)-1:0] n_space;
  logic [RW-1:0] out_k; data_t out_value;

  patch_unit dut (.*);

  int checks = 0, failures = 0, errs = 0;
  int n_res = 0, n_nbr = 0, n_new = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int K, S, C, H, W;
  data_t ifm [int];
  elem_t fwd_q [$], fwd_saved [$];
  int exp_k;
  bit stalls;

  always @(negedge clk) begin
    out_ready <= !stalls || ($urandom_range(3) != 0);
    fwd_ready <= !stalls || ($urandom_range(3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (took_res) n_res++;
    if (took_nbr) n_nbr++;
    if (took_new) n_new++;
    if (out_valid && out_ready) begin
      int ch, ky, kx, e;
      ch = exp_k / (K * K); ky = (exp_k / K) % K; kx = exp_k % K;
      e = int'(ifm[(ch * H + int'(py) + ky) * W + int'(px) + kx]);
      checks++;
      if (int'(out_k) != exp_k || int'(out_value) != e) begin
        failures++;
        if (errs++ < 10) $display("out k=%0d v=%0d exp k=%0d v=%0d", out_k, out_value, exp_k, e);
      end
      if (has_right && kx >= S) fwd_q.push_back(elem_t'{value: data_t'(e), row: CW'(int'(py) + ky), col: CW'(int'(px) + kx)});
      exp_k++;
    end
    if (fwd_valid && fwd_ready) begin
      elem_t e;
      checks++;
      if (fwd_q.size() == 0) begin failures++; $display("unexpected forward"); end
      else begin
        e = fwd_q.pop_front();
        if (fwd_data !== e) begin failures++; $display("forward mismatch"); end
      end
      fwd_saved.push_back(fwd_data);
    end
  end

  task automatic patch(int x, int y, bit l, bit r, bit u, bit d, int rrd, int rwr);
    elem_t nq [$];
    @(negedge clk);
    px = CW'(x); py = CW'(y); has_left = l; has_right = r; has_up = u; has_down = d;
    r_rd_base = ($clog2(RD))'(rrd); r_wr_base = ($clog2(RD))'(rwr);
    for (int ch = 0; ch < C; ch++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++)
          if (pos_src(KW'(K), KW'(S), KW'(ky), KW'(kx), l, u) == SRC_NEW)
            nq.push_back(elem_t'{value: ifm[(ch * H + y + ky) * W + x + kx],
                                 row: CW'(y + ky), col: CW'(x + kx)});
    exp_k = 0;
    start = 1; @(negedge clk); start = 0;
    while (busy || nq.size() != 0 || (l && fwd_saved.size() != 0)) begin
      n_push = 0; g_push = 0;
      if (nq.size() != 0 && n_space != 0) begin n_data = nq.pop_front(); n_push = 1; end
      if (l && fwd_saved.size() != 0 && g_ready) begin g_data = fwd_saved.pop_front(); g_push = 1; end
      @(negedge clk);
      n_push = 0; g_push = 0;
    end
    checks++;
    if (exp_k != C * K * K) begin failures++; $display("patch emitted %0d of %0d", exp_k, C * K * K); end
  endtask

  task automatic layer(int k_, int s_, int c_);
    K = k_; S = s_; C = c_; H = K + S + 2; W = K + S + 2;
    k = KW'(K); s = KW'(S); c = CHW'(C);
    ifm.delete();
    for (int i = 0; i < C * H * W; i++) ifm[i] = data_t'(int'($urandom_range(2000)) - 1000);
    fwd_saved.delete(); fwd_q.delete();
    patch(0, 0, 0, 1, 0, 1, 0, 100);      // A: keeps rows ky >= S at 100
    // save A's forwards for C, then B reads the reserve written by A
    begin
      elem_t keep [$];
      keep = fwd_saved;
      fwd_saved.delete();
      patch(0, S, 0, 0, 1, 0, 100, 0);    // B
      fwd_saved = keep;
    end
    patch(S, 0, 1, 0, 0, 0, 0, 0);        // C
  endtask

  initial begin
    start = 0; n_push = 0; g_push = 0; n_data = '0; g_data = '0; stalls = 1;
    px = 0; py = 0; has_left = 0; has_right = 0; has_up = 0; has_down = 0;
    r_rd_base = 0; r_wr_base = 0; k = 3; s = 1; c = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    layer(3, 1, 2);
    layer(3, 2, 3);
    layer(5, 1, 1);
    layer(2, 1, 4);
    checks++; if (n_res == 0) begin failures++; $display("reserve never used"); end
    checks++; if (n_nbr == 0) begin failures++; $display("neighbour buffer never used"); end
    checks++; if (n_new == 0) begin failures++; $display("new buffer never used"); end
    $display("taken: new %0d neighbour %0d reserve %0d", n_new, n_nbr, n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
