// gemm_input_ctrl: input controller of the GEMM unit (paper Sec. 3.3, Fig. 5,
// Fig. 10, Fig. 11).
//
// For every tile (one group of patch columns in each active IM2COL unit) it
// walks the IM2COL rows k = 0 .. K*K*C-1 and decides, per row, whether the
// array has any work:
//   - M1[k] = 0: the filter matrix column k is all zero (paper bitmap M1);
//     nothing is read and the row is skipped;
//   - M1[k] = 1 but the compress bitmap says the IM2COL row k is all zero
//     (in multi-array mode: zero in every active unit); the filter blocks of
//     that column are stepped over without being read and the row is skipped
//     (Fig. 11(3): a row enters only when both bitmaps are 1);
//   - otherwise the weights are fetched and pushed with the IM2COL row.
// The filter matrix is stored in the paper's sparse format (Fig. 10): non-
// zero blocks of G filters (array A) spread over NB = M/G banks by their row,
// bitmap M1 with one bit per column, bitmap M2 with one bit per block of a
// non-zero column. Filter f is held by array row f mod R in accumulator
// f div R, R = M (tall) or M/NSUB (multi mode), so pass p of a column needs
// block p*NB' + b from bank b; bank b keeps its blocks column by column,
// passes inside a column, and one read pointer per bank walks them. M2 word o
// (o counts the non-zero columns) holds PASSES bits per bank.
// One cycle per pass reads one block from every bank whose M2 bit is set
// (absent blocks are zeros), filling the four weight slots of each array row;
// the next cycle pushes the whole weight column and the IM2COL row into the
// array, stalling while the array's edge FIFOs are full. A skipped row costs
// one cycle. After the last row the controller waits for the array to empty,
// asks the output controller to drain the results and releases the patch
// buffers. The bank mapping, the block size G and the timing are this
// design's choices; the paper fixes only the three arrays and their meaning.
// f_edge is the patch-buffer read row passed straight through: the buffer
// is read at the row index k the controller holds while it pushes.
module gemm_input_ctrl import spots_pkg::*; #(
  parameter int unsigned M       = 128,
  parameter int unsigned N       = 4,
  parameter int unsigned NSUB    = 4,
  parameter int unsigned G       = 8,
  parameter int unsigned A_DEPTH = 4096,
  parameter int unsigned KR_MAX  = 4608,
  parameter int unsigned TW      = 16     // tile counter width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 start,
  output logic                 done,
  // patch buffers and compress bitmaps, one per IM2COL unit
  input  logic [NSUB-1:0]      buf_full,
  output logic                 buf_release,
  output logic [RW-1:0]        buf_k,
  input  logic [NSUB-1:0]      buf_nonzero,
  input  data_t                buf_row [NSUB][N],
  // filter metadata and blocks
  output logic [$clog2(KR_MAX)-1:0] m1_addr,
  input  logic                 m1_bit,
  output logic [$clog2(KR_MAX)-1:0] m2_addr,
  input  logic [(M/G)*PASSES-1:0] m2_word,
  output logic [$clog2(A_DEPTH)-1:0] a_addr [M/G],
  input  logic [G*DW-1:0]      a_block [M/G],
  // systolic array
  output wvec_t                w_edge [M],
  output data_t                f_edge [NSUB][N],
  output logic                 push,
  input  logic                 edge_ready,
  output logic [2:0]           npass,
  input  logic                 arr_idle,
  // output controller
  output logic                 drain_req,
  output logic [TW-1:0]        drain_tile,
  input  logic                 drain_done,
  // events
  output logic                 ev_skip_col,
  output logic                 ev_skip_row,
  output logic                 ev_stall
);
  localparam int unsigned NB  = M / G;
  localparam int unsigned OAW = $clog2(KR_MAX);
  localparam int unsigned AAW = $clog2(A_DEPTH);

  typedef enum logic [3:0] {S_IDLE, S_SETUP, S_WAIT, S_SCAN, S_PASS, S_PUSH,
                            S_FLUSH, S_DRAIN, S_REL, S_DONE} state_e;
  state_e st;

  logic [NSUB-1:0] active_units;
  logic [RW-1:0]   kr, k;
  logic [OAW-1:0]  ord;
  logic [AAW-1:0]  ptr [NB];
  logic [1:0]      p;
  logic [TW-1:0]   tile, ntiles;
  wvec_t           wbuf [M];
  logic            row_nz;

  assign active_units = cfg.tall_mode ? NSUB'(1) : '1;
  assign buf_k   = k;
  assign m1_addr = OAW'(k);
  assign m2_addr = ord;
  assign row_nz  = |(buf_nonzero & active_units);
  assign done    = (st == S_DONE);
  assign drain_tile = tile;

  for (genvar b = 0; b < NB; b++) begin : g_addr
    assign a_addr[b] = ptr[b];
  end

  // array edge
  always_comb begin
    for (int r = 0; r < M; r++) w_edge[r] = wbuf[r];
    for (int u = 0; u < NSUB; u++)
      for (int j = 0; j < N; j++) f_edge[u][j] = buf_row[u][j];
  end
  assign push     = (st == S_PUSH) && edge_ready;
  assign ev_stall = (st == S_PUSH) && !edge_ready;
  assign ev_skip_col = (st == S_SCAN) && (k < kr) && !m1_bit;
  assign ev_skip_row = (st == S_SCAN) && (k < kr) && m1_bit && !row_nz;

  // layer constants: filter rows per array row, groups per unit per output row
  logic [31:0] rows, lgc;
  assign rows = cfg.tall_mode ? M : M / NSUB;
  assign lgc  = ((32'(cfg.wout) + N - 1) / N + (cfg.tall_mode ? 1 : NSUB) - 1) /
                (cfg.tall_mode ? 1 : NSUB);

  function automatic logic [AAW-1:0] popc(input logic [PASSES-1:0] v, input logic [2:0] np);
    logic [AAW-1:0] n;
    n = '0;
    for (int i = 0; i < PASSES; i++) if (v[i] && 3'(i) < np) n = n + 1'b1;
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      kr        <= '0;
      k         <= '0;
      ord       <= '0;
      p         <= '0;
      tile      <= '0;
      ntiles    <= '0;
      npass     <= 3'd1;
      drain_req <= 1'b0;
      buf_release <= 1'b0;
      for (int b = 0; b < NB; b++) ptr[b] <= '0;
      for (int r = 0; r < M; r++) wbuf[r] <= '0;
    end else begin
      drain_req   <= 1'b0;
      buf_release <= 1'b0;
      unique case (st)
        S_IDLE: if (start && !cfg.pool_mode) st <= S_SETUP;
        S_SETUP: begin
          kr     <= RW'(32'(cfg.k) * 32'(cfg.k) * 32'(cfg.c));
          npass  <= 3'((32'(cfg.f) + rows - 1) / rows);
          ntiles <= TW'(32'(cfg.hout) * lgc);
          tile   <= '0;
          st     <= S_WAIT;
        end
        S_WAIT: if ((buf_full & active_units) == active_units) begin
          k   <= '0;
          ord <= '0;
          for (int b = 0; b < NB; b++) ptr[b] <= '0;
          st  <= S_SCAN;
        end
        S_SCAN: begin
          if (k == kr) st <= S_FLUSH;
          else if (!m1_bit) k <= k + 1'b1;
          else if (!row_nz) begin
            for (int b = 0; b < NB; b++) ptr[b] <= ptr[b] + popc(m2_word[b*PASSES +: PASSES], npass);
            ord <= ord + 1'b1;
            k   <= k + 1'b1;
          end else begin
            p  <= '0;
            st <= S_PASS;
          end
        end
        S_PASS: begin
          for (int b = 0; b < NB; b++) begin
            for (int e = 0; e < G; e++)
              wbuf[b*G+e][p] <= m2_word[b*PASSES + p] ? data_t'(a_block[b][e*DW +: DW]) : '0;
            if (m2_word[b*PASSES + p]) ptr[b] <= ptr[b] + 1'b1;
          end
          if ({1'b0, p} == npass - 3'd1) st <= S_PUSH;
          else p <= p + 1'b1;
        end
        S_PUSH: if (edge_ready) begin
          ord <= ord + 1'b1;
          k   <= k + 1'b1;
          st  <= S_SCAN;
        end
        S_FLUSH: if (arr_idle) begin
          drain_req <= 1'b1;
          st        <= S_DRAIN;
        end
        S_DRAIN: if (drain_done) begin
          buf_release <= 1'b1;
          st          <= S_REL;
        end
        S_REL: begin
          if (tile + 1'b1 == ntiles) st <= S_DONE;
          else st <= S_WAIT;
          tile <= tile + 1'b1;
        end
        S_DONE: if (start && !cfg.pool_mode) st <= S_SETUP;
        default: st <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  always_ff @(posedge clk)
    if (rst_n && st == S_SETUP)
      assert (32'(cfg.k) * 32'(cfg.k) * 32'(cfg.c) <= KR_MAX)
        else $error("gemm_input_ctrl: layer needs %0d IM2COL rows, buffer has %0d",
                    32'(cfg.k) * 32'(cfg.k) * 32'(cfg.c), KR_MAX);
`endif
endmodule
