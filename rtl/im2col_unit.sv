// im2col_unit: one hardware IM2COL unit (paper Sec. 3.1, Fig. 6 left).
//
// An input controller, NPU patch units joined in a one-way ring (PU p feeds
// PU p+1, the last feeds the first) and an output controller. The unit reads
// the input feature map and writes, group after group, NPU columns of the
// IM2COL matrix into its patch buffer (or, in pool mode, streams max-pooled
// values out). See im2col_input_ctrl, patch_unit and im2col_output_ctrl for
// the mechanisms. The prototype has four PUs per unit; the paper says the
// extra units used in multi-array mode are smaller, which here means a
// smaller reserved buffer (parameter R_DEPTH).
module im2col_unit import spots_pkg::*; #(
  parameter int unsigned NPU     = 4,
  parameter int unsigned N_DEPTH = 4,
  parameter int unsigned G_DEPTH = 256,
  parameter int unsigned R_DEPTH = 4096,
  parameter int unsigned FA      = 18
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic [2:0]           unit_id,
  input  logic [2:0]           n_units,
  input  logic                 start,
  output logic                 done,
  // ifmap SRAM read port
  output logic                 rd_en,
  output logic [FA-1:0]        rd_addr,
  input  data_t                rd_data,
  // patch buffer
  input  logic                 bank_free,
  output logic                 commit,
  output logic [NPU-1:0]       wr_en,
  output logic [RW-1:0]        wr_k     [NPU],
  output data_t                wr_data  [NPU],
  // pooling results
  output logic [NPU-1:0]       pool_valid,
  output data_t                pool_value [NPU],
  output logic [CHW-1:0]       pool_ch    [NPU],
  output logic [CW-1:0]        pool_row,
  output logic [CW-1:0]        pool_col   [NPU]
);
  localparam int unsigned RAW = $clog2(R_DEPTH);

  logic [NPU-1:0] pu_start, pu_left, pu_right, pu_up, pu_down, pu_busy, n_push;
  logic [CW-1:0]  pu_px [NPU], pu_py [NPU];
  logic [RAW-1:0] pu_rrd, pu_rwr;
  elem_t          n_data;
  logic [$clog2(N_DEPTH+1)-1:0] n_space [NPU];
  logic           byp_valid, bypass;
  logic [$clog2(NPU)-1:0] byp_col;
  logic [RW-1:0]  byp_k;
  data_t          byp_value;
  logic [CW-1:0]  grp_row, grp_xbase;

  logic [NPU-1:0] fwd_valid, g_ready, out_valid;
  elem_t          fwd_data [NPU];
  logic [RW-1:0]  out_k [NPU];
  data_t          out_value [NPU];

  im2col_input_ctrl #(.NPU(NPU), .N_DEPTH(N_DEPTH), .G_DEPTH(G_DEPTH), .R_DEPTH(R_DEPTH), .FA(FA)) u_in (
    .clk, .rst_n, .cfg, .unit_id, .n_units, .start, .done, .bank_free, .commit,
    .rd_en, .rd_addr, .rd_data,
    .pu_start, .pu_px, .pu_py, .pu_left, .pu_right, .pu_up, .pu_down, .pu_rrd, .pu_rwr,
    .pu_busy, .n_push, .n_data, .n_space,
    .byp_valid, .byp_col, .byp_k, .byp_value, .grp_row, .grp_xbase, .bypass);

  for (genvar p = 0; p < NPU; p++) begin : g_pu
    localparam int unsigned PL = (p + NPU - 1) % NPU;   // left neighbour on the ring
    localparam int unsigned PR = (p + 1) % NPU;         // right neighbour on the ring
    patch_unit #(.N_DEPTH(N_DEPTH), .G_DEPTH(G_DEPTH), .R_DEPTH(R_DEPTH)) u_pu (
      .clk, .rst_n, .k(cfg.k), .s(cfg.s), .c(cfg.c),
      .start(pu_start[p]), .px(pu_px[p]), .py(pu_py[p]),
      .has_left(pu_left[p]), .has_right(pu_right[p]), .has_up(pu_up[p]), .has_down(pu_down[p]),
      .r_rd_base(pu_rrd), .r_wr_base(pu_rwr), .busy(pu_busy[p]),
      .n_push(n_push[p]), .n_data, .n_space(n_space[p]),
      .g_push(fwd_valid[PL]), .g_data(fwd_data[PL]), .g_ready(g_ready[p]),
      .fwd_valid(fwd_valid[p]), .fwd_data(fwd_data[p]), .fwd_ready(g_ready[PR]),
      .out_valid(out_valid[p]), .out_k(out_k[p]), .out_value(out_value[p]), .out_ready(1'b1),
      .took_new(), .took_nbr(), .took_res());
  end

  im2col_output_ctrl #(.NPU(NPU)) u_out (
    .clk, .rst_n, .cfg, .grp_row, .grp_xbase,
    .pu_valid(out_valid), .pu_k(out_k), .pu_value(out_value),
    .byp_valid, .byp_col, .byp_k, .byp_value,
    .wr_en, .wr_k, .wr_data,
    .pool_valid, .pool_value, .pool_ch, .pool_row, .pool_col);
endmodule
