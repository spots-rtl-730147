// tb_systolic_array: self-checking test of the reconfigurable systolic array
// at a reduced size (M = 8 rows, N = 2 columns, NSUB = 2 sub-arrays).
//
// Tall mode: pushes the columns of a random filter matrix (up to 2*8 filters,
// two accumulator passes) together with the rows of a random IM2COL matrix,
// drains the results and compares them with a matrix product computed here.
// Multi mode: each sub-array gets its own IM2COL matrix and the broadcast
// weights; each must produce its own product. Checks also that a column
// pushed into an empty tall array has been consumed after at most
// M + N + npass + 2 cycles.
`timescale 1ns/1ps
module tb_systolic_array;
  import spots_pkg::*;
  localparam int M = 8, N = 2, NSUB = 2, SUB = M / NSUB;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tall_mode, push, edge_ready, drain, idle;
  logic [2:0] npass; logic [1:0] drain_sel;
  wvec_t w_edge [M]; data_t f_edge [NSUB][N]; acc_t row_result [M];
  logic [$clog2(M*N+1)-1:0] macs_active, macs_gated;

  systolic_array #(.M(M), .N(N), .NSUB(NSUB)) dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int KD = 12;
  int A [2*M][KD];           // filters x k
  int B [NSUB][KD][N];       // per sub-array IM2COL rows

  task automatic run(bit tall, int np);
    int rows, nf;
    acc_t got [M][N][PASSES];
    rows = tall ? M : SUB;
    nf = rows * np;
    tall_mode = tall; npass = 3'(np);
    foreach (A[f, k]) A[f][k] = ($urandom_range(3) == 0) ? 0 : int'($urandom_range(40)) - 20;
    foreach (B[s, k, j]) B[s][k][j] = ($urandom_range(3) == 0) ? 0 : int'($urandom_range(40)) - 20;
    for (int k = 0; k < KD; k++) begin
      @(negedge clk);
      while (!edge_ready) @(negedge clk);
      for (int r = 0; r < M; r++)
        for (int p = 0; p < PASSES; p++)
          w_edge[r][p] = (p < np && r < rows) ? data_t'(A[p * rows + r][k]) : data_t'(0);
      for (int s = 0; s < NSUB; s++)
        for (int j = 0; j < N; j++) f_edge[s][j] = data_t'(B[s][k][j]);
      push = 1;
      @(negedge clk); push = 0;
    end
    while (!idle) @(negedge clk);
    for (int p = 0; p < np; p++)
      for (int st = 0; st < N; st++) begin
        @(negedge clk); drain = 1; drain_sel = 2'(p); #1;
        for (int r = 0; r < M; r++) got[r][N-1-st][p] = row_result[r];
      end
    @(negedge clk); drain = 0;
    for (int r = 0; r < M; r++)
      for (int j = 0; j < N; j++)
        for (int p = 0; p < np; p++) begin
          int s, f, e;
          s = r / rows; f = p * rows + (r % rows);
          e = 0;
          for (int k = 0; k < KD; k++) e += A[f][k] * B[s][k][j];
          checks++;
          if (got[r][j][p] !== acc_t'(e)) begin
            failures++;
            $display("%s r=%0d j=%0d p=%0d got %0d exp %0d", tall ? "tall" : "multi", r, j, p,
                     got[r][j][p], e);
          end
        end
  endtask

  initial begin
    int t0, lat;
    push = 0; drain = 0; drain_sel = 0; tall_mode = 1; npass = 1;
    foreach (w_edge[r]) w_edge[r] = '0;
    foreach (f_edge[s, j]) f_edge[s][j] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(1'b1, 1);
    run(1'b1, 2);
    run(1'b0, 2);
    run(1'b0, 1);
    // latency of one column through an empty tall array
    tall_mode = 1; npass = 3'd1;
    @(negedge clk);
    foreach (w_edge[r]) w_edge[r] = '{default: data_t'(1)};
    foreach (f_edge[s, j]) f_edge[s][j] = data_t'(1);
    push = 1; @(negedge clk); push = 0;
    lat = 1;
    while (!idle && lat < 100) begin @(negedge clk); lat++; end
    checks++;
    if (lat > M + N + 3) begin failures++; $display("latency %0d > %0d", lat, M + N + 3); end
    for (int st = 0; st < N; st++) begin @(negedge clk); drain = 1; drain_sel = 0; end
    @(negedge clk); drain = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
