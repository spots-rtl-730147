// spots_top: the SPOTS sparse CNN accelerator (paper Fig. 5 and Fig. 12).
//
// A convolution layer is computed as one matrix product: filter matrix
// (F x K*K*C) times the IM2COL matrix (K*K*C x patches). IM2COL units build
// the IM2COL matrix on the fly from the ifmap SRAM, a group of N patch
// columns at a time, into double buffers; compress marks all-zero rows; the
// GEMM input controller decodes the sparse filter format, skips rows whose
// filter column or IM2COL row is zero and streams the rest into the
// output-stationary systolic array; the GEMM output controller drains the
// results into the ofmap SRAM. IM2COL of the next tile overlaps GEMM of the
// current one through the double buffers.
//
// Modes (cfg): tall_mode = 1 uses one M x N array fed by IM2COL unit 0;
// tall_mode = 0 splits it into NSUB arrays of M/NSUB rows, each fed by its own
// IM2COL unit, the weights broadcast to all. pool_mode = 1 runs only the
// IM2COL units and returns max-pooled values on the pool ports.
//
// Host interface: before 'start' the host loads the ifmap SRAM (channel-major
// rows, addr = (ch*H + row)*W + col), the filter blocks (array A, per bank),
// M1 (one bit per IM2COL row) and M2 (one word per non-zero filter column),
// and sets cfg. 'done' rises when the layer is finished and stays high until
// the next start. Results are read from the ofmap SRAM (layout in
// gemm_output_ctrl). Off-chip DRAM is not part of the design; the host ports
// stand for it. Defaults follow the paper's prototype (Table 1): 128 x 4 PEs
// (512), four 32 x 4 configurations, four IM2COL units of four PUs, 1 MB
// filter SRAM (16 banks x 4096 blocks x 8 x 16 bit), 512 KB ifmap SRAM,
// 8 KB reserved buffer per PU in the main IM2COL unit.
module spots_top import spots_pkg::*; #(
  parameter int unsigned M             = 128,
  parameter int unsigned N             = 4,
  parameter int unsigned NSUB          = 4,
  parameter int unsigned G             = 8,
  parameter int unsigned A_DEPTH       = 4096,
  parameter int unsigned KR_MAX        = 4608,
  parameter int unsigned FMAP_DEPTH    = 262144,
  parameter int unsigned OF_DEPTH      = 1024,
  parameter int unsigned R_DEPTH       = 4096,
  parameter int unsigned R_DEPTH_SMALL = 1024,
  parameter int unsigned G_DEPTH       = 256,
  parameter int unsigned N_DEPTH       = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  layer_cfg_t                    cfg,
  input  logic                          start,
  output logic                          done,
  // host load ports
  input  logic                          fmap_we,
  input  logic [$clog2(FMAP_DEPTH)-1:0] fmap_waddr,
  input  data_t                         fmap_wdata,
  input  logic                          a_we,
  input  logic [$clog2(M/G)-1:0]        a_bank,
  input  logic [$clog2(A_DEPTH)-1:0]    a_waddr,
  input  logic [G*DW-1:0]               a_wdata,
  input  logic                          m1_we,
  input  logic [$clog2(KR_MAX)-1:0]     m1_waddr,
  input  logic                          m1_wdata,
  input  logic                          m2_we,
  input  logic [$clog2(KR_MAX)-1:0]     m2_waddr,
  input  logic [(M/G)*PASSES-1:0]       m2_wdata,
  // ofmap read port
  input  logic [$clog2(OF_DEPTH)-1:0]   of_raddr,
  output logic [M*AW-1:0]               of_rdata,
  // pooling results, per IM2COL unit and column
  output logic [N-1:0]                  pool_valid [NSUB],
  output data_t                         pool_value [NSUB][N],
  output logic [CHW-1:0]                pool_ch    [NSUB][N],
  output logic [CW-1:0]                 pool_row   [NSUB],
  output logic [CW-1:0]                 pool_col   [NSUB][N],
  // events
  output logic                          ev_skip_col,
  output logic                          ev_skip_row,
  output logic                          ev_stall
);
  localparam int unsigned NB  = M / G;
  localparam int unsigned FA  = $clog2(FMAP_DEPTH);
  localparam int unsigned OFA = $clog2(OF_DEPTH);
  localparam int unsigned TW  = 16;

  logic [2:0] n_units;
  assign n_units = cfg.tall_mode ? 3'd1 : 3'(NSUB);

  // ---------------- ifmap SRAM ----------------
  logic [FA-1:0] f_raddr [NSUB];
  data_t         f_rdata [NSUB];
  logic [DW-1:0] f_rdata_raw [NSUB];
  spots_sram #(.WIDTH(DW), .DEPTH(FMAP_DEPTH), .NRD(NSUB), .SYNC_READ(1'b1)) u_fmap (
    .clk, .we(fmap_we), .waddr(fmap_waddr), .wdata(fmap_wdata),
    .raddr(f_raddr), .rdata(f_rdata_raw));
  for (genvar u = 0; u < NSUB; u++) begin : g_fcast
    assign f_rdata[u] = data_t'(f_rdata_raw[u]);
  end

  // ---------------- IM2COL units, buffers, compress ----------------
  logic [NSUB-1:0] u_done, u_commit, b_free, b_full, b_nz;
  logic            b_release;
  logic [RW-1:0]   b_rdk;
  data_t           b_row [NSUB][N];

  for (genvar u = 0; u < NSUB; u++) begin : g_unit
    logic [N-1:0]  wr_en;
    logic [RW-1:0] wr_k [N];
    data_t         wr_data [N];
    logic          wr_bank, rd_bank, rel, ustart;
    logic          rd_en_unused;
    data_t         row [N];

    assign ustart = start && (u < n_units);
    assign rel    = b_release && (u < n_units);

    im2col_unit #(.NPU(N), .N_DEPTH(N_DEPTH), .G_DEPTH(G_DEPTH),
                  .R_DEPTH(u == 0 ? R_DEPTH : R_DEPTH_SMALL), .FA(FA)) u_im2col (
      .clk, .rst_n, .cfg, .unit_id(3'(u)), .n_units, .start(ustart), .done(u_done[u]),
      .rd_en(rd_en_unused), .rd_addr(f_raddr[u]), .rd_data(f_rdata[u]),
      .bank_free(b_free[u]), .commit(u_commit[u]),
      .wr_en, .wr_k, .wr_data,
      .pool_valid(pool_valid[u]), .pool_value(pool_value[u]), .pool_ch(pool_ch[u]),
      .pool_row(pool_row[u]), .pool_col(pool_col[u]));

    patch_buffer #(.NCOL(N), .DEPTH(KR_MAX)) u_buf (
      .clk, .rst_n, .wr_en, .wr_k, .wr_data, .commit(u_commit[u]),
      .wr_free(b_free[u]), .wr_bank, .rd_k(b_rdk), .rd_data(row),
      .release_bank(rel), .rd_full(b_full[u]), .rd_bank);

    compress #(.NCOL(N), .DEPTH(KR_MAX)) u_cmp (
      .clk, .rst_n, .wr_en, .wr_k, .wr_data, .wr_bank, .rd_bank,
      .release_bank(rel), .rd_k(b_rdk), .rd_nonzero(b_nz[u]));

    for (genvar j = 0; j < N; j++) begin : g_row
      assign b_row[u][j] = row[j];
    end
  end

  // ---------------- filter SRAMs ----------------
  logic [$clog2(KR_MAX)-1:0] m1_addr [1], m2_addr [1];
  logic [0:0]                m1_bit  [1];
  logic [NB*PASSES-1:0]      m2_word [1];
  logic [$clog2(A_DEPTH)-1:0] a_addr [NB];
  logic [G*DW-1:0]           a_block [NB];

  spots_sram #(.WIDTH(1), .DEPTH(KR_MAX), .NRD(1), .SYNC_READ(1'b0)) u_m1 (
    .clk, .we(m1_we), .waddr(m1_waddr), .wdata(m1_wdata), .raddr(m1_addr), .rdata(m1_bit));
  spots_sram #(.WIDTH(NB*PASSES), .DEPTH(KR_MAX), .NRD(1), .SYNC_READ(1'b0)) u_m2 (
    .clk, .we(m2_we), .waddr(m2_waddr), .wdata(m2_wdata), .raddr(m2_addr), .rdata(m2_word));

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [$clog2(A_DEPTH)-1:0] ra [1];
    logic [G*DW-1:0]            rd [1];
    assign ra[0]      = a_addr[b];
    assign a_block[b] = rd[0];
    spots_sram #(.WIDTH(G*DW), .DEPTH(A_DEPTH), .NRD(1), .SYNC_READ(1'b0)) u_a (
      .clk, .we(a_we && a_bank == $clog2(NB)'(b)), .waddr(a_waddr), .wdata(a_wdata),
      .raddr(ra), .rdata(rd));
  end

  // ---------------- GEMM ----------------
  wvec_t       w_edge [M];
  data_t       f_edge [NSUB][N];
  logic        push, edge_ready, arr_idle, drain, drain_req, drain_done, g_done;
  logic [1:0]  drain_sel;
  logic [2:0]  npass;
  acc_t        row_result [M];
  logic [TW-1:0] drain_tile;

  gemm_input_ctrl #(.M(M), .N(N), .NSUB(NSUB), .G(G), .A_DEPTH(A_DEPTH), .KR_MAX(KR_MAX), .TW(TW)) u_gin (
    .clk, .rst_n, .cfg, .start, .done(g_done),
    .buf_full(b_full), .buf_release(b_release), .buf_k(b_rdk), .buf_nonzero(b_nz), .buf_row(b_row),
    .m1_addr(m1_addr[0]), .m1_bit(m1_bit[0][0]), .m2_addr(m2_addr[0]), .m2_word(m2_word[0]),
    .a_addr, .a_block,
    .w_edge, .f_edge, .push, .edge_ready, .npass, .arr_idle,
    .drain_req, .drain_tile, .drain_done,
    .ev_skip_col, .ev_skip_row, .ev_stall);

  systolic_array #(.M(M), .N(N), .NSUB(NSUB)) u_sa (
    .clk, .rst_n, .tall_mode(cfg.tall_mode), .npass, .w_edge, .f_edge, .push, .edge_ready,
    .drain, .drain_sel, .row_result, .idle(arr_idle), .macs_active(), .macs_gated());

  logic           of_we;
  logic [OFA-1:0] of_waddr;
  logic [M*AW-1:0] of_wdata;
  logic [OFA-1:0] of_ra [1];
  logic [M*AW-1:0] of_rd [1];

  gemm_output_ctrl #(.M(M), .N(N), .OFA(OFA), .TW(TW)) u_gout (
    .clk, .rst_n, .npass, .drain_req, .drain_tile, .drain_done,
    .drain, .drain_sel, .row_result, .of_we, .of_waddr, .of_wdata);

  assign of_ra[0] = of_raddr;
  assign of_rdata = of_rd[0];
  spots_sram #(.WIDTH(M*AW), .DEPTH(OF_DEPTH), .NRD(1), .SYNC_READ(1'b0)) u_ofmap (
    .clk, .we(of_we), .waddr(of_waddr), .wdata(of_wdata), .raddr(of_ra), .rdata(of_rd));

  // ---------------- completion ----------------
  always_comb begin
    done = cfg.pool_mode ? 1'b1 : g_done;
    for (int u = 0; u < NSUB; u++)
      if (u < n_units) done &= u_done[u];
  end
endmodule
