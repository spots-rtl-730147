// systolic_array: the reconfigurable SPOTS GEMM array of M x N PEs.
//
// Weights (the filter matrix) enter each PE row from the left and move right;
// IM2COL results (one patch per column) enter each column from the top and
// move down (paper Sec. 3.2, Fig. 8). The dataflow is output stationary:
// PE(i,j) accumulates output elements for the filter rows assigned to array
// row i and the patch assigned to column j.
//
// Reconfiguration (paper Sec. 3.4, Fig. 12a): the rows are cut into NSUB
// sub-arrays of M/NSUB rows. At the top of every sub-array but the first, a
// multiplexer per column, steered by tall_mode, selects the feature input
// from the PE above (tall mode: one M x N array) or from the sub-array's own
// IM2COL unit (f_edge[s]; multi mode: NSUB arrays of M/NSUB x N). In multi
// mode the weight matrix is broadcast: row r of every sub-array receives
// w_edge[r mod M/NSUB], so the sub-arrays compute different result columns
// with the same filters (Fig. 12b). The paper's prototype is M = 128, N = 4,
// NSUB = 4 (one 128x4 or four 32x4 arrays, Table 1).
//
// Interface: the controller presents a whole weight column (w_edge) and a
// whole feature row (f_edge) and pushes both with one push when edge_ready.
// Inside, operands wait in the PE FIFOs for their partners, so no skew is
// applied at the edges: the weight FIFO of the left-edge PE of row i is i+2
// entries deep and takes the place of a skew delay line (this sizing is this
// design's choice; the paper gives 2 KB of PE local buffers in total). 'idle' is high when every PE is empty. Results leave
// through the drain chain (see spots_pe): each drain cycle shifts accumulator
// drain_sel one PE to the right; row_result[i] is the value leaving row i.
module systolic_array import spots_pkg::*; #(
  parameter int unsigned M    = 128,
  parameter int unsigned N    = 4,
  parameter int unsigned NSUB = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tall_mode,
  input  logic [2:0]  npass,
  input  wvec_t       w_edge [M],
  input  data_t       f_edge [NSUB][N],
  input  logic        push,
  output logic        edge_ready,
  input  logic        drain,
  input  logic [1:0]  drain_sel,
  output acc_t        row_result [M],
  output logic        idle,
  output logic [$clog2(M*N+1)-1:0] macs_active,
  output logic [$clog2(M*N+1)-1:0] macs_gated
);
  localparam int unsigned SUB = M / NSUB;

  wvec_t w_o   [M][N];
  logic  w_ov  [M][N];
  logic  w_rdy [M][N];
  data_t f_o   [M][N];
  logic  f_ov  [M][N];
  logic  f_rdy [M][N];
  acc_t  acc_o [M][N];
  logic [M*N-1:0] pe_idle, pe_mac, pe_gate;

  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      wvec_t wi;  logic wv;
      data_t fi;  logic fv;
      logic  wo_rdy, fo_rdy;
      acc_t  ai;

      if (j == 0) begin : g_wl
        assign wi = tall_mode ? w_edge[i] : w_edge[i % SUB];
        assign wv = push;
        assign ai = '0;
      end else begin : g_wn
        assign wi = w_o[i][j-1];
        assign wv = w_ov[i][j-1];
        assign ai = acc_o[i][j-1];
      end

      if (i == 0) begin : g_ft
        assign fi = f_edge[0][j];
        assign fv = push;
      end else if (i % SUB == 0) begin : g_fmux
        // tall_mode multiplexer between sub-arrays (Fig. 12a)
        assign fi = tall_mode ? f_o[i-1][j]  : f_edge[i/SUB][j];
        assign fv = tall_mode ? f_ov[i-1][j] : push;
      end else begin : g_fn
        assign fi = f_o[i-1][j];
        assign fv = f_ov[i-1][j];
      end

      if (j == N-1) begin : g_wr
        assign wo_rdy = 1'b1;
      end else begin : g_wrn
        assign wo_rdy = w_rdy[i][j+1];
      end

      if (i == M-1) begin : g_fb
        assign fo_rdy = 1'b1;
      end else if ((i+1) % SUB == 0) begin : g_fbm
        assign fo_rdy = tall_mode ? f_rdy[i+1][j] : 1'b1;
      end else begin : g_fbn
        assign fo_rdy = f_rdy[i+1][j];
      end

      // Row i's left-edge PE holds weights for i cycles until the feature
      // value has travelled down i rows, so its weight FIFO is i+2 deep;
      // further right the operands arrive in step and 2 entries suffice.
      spots_pe #(.W_DEPTH(j == 0 ? i + 2 : 2)) u_pe (
        .clk, .rst_n,
        .w_in(wi), .w_valid(wv), .w_ready(w_rdy[i][j]),
        .f_in(fi), .f_valid(fv), .f_ready(f_rdy[i][j]),
        .w_out(w_o[i][j]), .w_out_valid(w_ov[i][j]), .w_out_ready(wo_rdy),
        .f_out(f_o[i][j]), .f_out_valid(f_ov[i][j]), .f_out_ready(fo_rdy),
        .npass, .drain, .drain_sel, .acc_in(ai), .acc_out(acc_o[i][j]),
        .idle(pe_idle[i*N+j]), .mac_active(pe_mac[i*N+j]), .mac_gated(pe_gate[i*N+j]));
    end
    assign row_result[i] = acc_o[i][N-1];
  end

  always_comb begin
    edge_ready = 1'b1;
    for (int i = 0; i < M; i++) edge_ready &= w_rdy[i][0];
    for (int j = 0; j < N; j++) begin
      edge_ready &= f_rdy[0][j];
      for (int s = 1; s < NSUB; s++)
        if (!tall_mode) edge_ready &= f_rdy[s*SUB][j];
    end
  end

  assign idle        = &pe_idle;
  assign macs_active = $countones(pe_mac);
  assign macs_gated  = $countones(pe_gate);
endmodule
