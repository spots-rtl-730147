// im2col_output_ctrl: output controller of one IM2COL unit.
//
// Column j of the patch buffer receives the patch built by PU j, or, when
// the PUs are bypassed (stride >= kernel), the elements the input controller
// tags for column j. Each element is written at its IM2COL row index k, so
// one buffer column ends up holding one column of the IM2COL matrix; the
// patch buffer has one write port per column and the controller never
// stalls a PU.
//
// Pooling (paper Sec. 3.4: "adding the pooling operation (e.g., MAX) to the
// output of the patch units"): in pool mode nothing is written to the buffer;
// instead a running maximum is kept per column and, after the K*K elements
// of one channel, the result leaves on the pool port with its channel and
// output position. Every column can finish in the same cycle, so the pool
// port has one lane per column.
module im2col_output_ctrl import spots_pkg::*; #(
  parameter int unsigned NPU = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic [CW-1:0]        grp_row,
  input  logic [CW-1:0]        grp_xbase,
  // from the patch units
  input  logic [NPU-1:0]       pu_valid,
  input  logic [RW-1:0]        pu_k     [NPU],
  input  data_t                pu_value [NPU],
  // bypass stream from the input controller
  input  logic                 byp_valid,
  input  logic [$clog2(NPU)-1:0] byp_col,
  input  logic [RW-1:0]        byp_k,
  input  data_t                byp_value,
  // patch buffer write ports, one per column
  output logic [NPU-1:0]       wr_en,
  output logic [RW-1:0]        wr_k     [NPU],
  output data_t                wr_data  [NPU],
  // pooling results, one lane per column
  output logic [NPU-1:0]       pool_valid,
  output data_t                pool_value [NPU],
  output logic [CHW-1:0]       pool_ch    [NPU],
  output logic [CW-1:0]        pool_row,
  output logic [CW-1:0]        pool_col   [NPU]
);
  logic [NPU-1:0] v;
  logic [RW-1:0]  kk [NPU];
  data_t          dv [NPU];

  always_comb begin
    for (int j = 0; j < NPU; j++) begin
      if (byp_valid && byp_col == $clog2(NPU)'(j)) begin
        v[j] = 1'b1; kk[j] = byp_k; dv[j] = byp_value;
      end else begin
        v[j] = pu_valid[j]; kk[j] = pu_k[j]; dv[j] = pu_value[j];
      end
      wr_en[j]   = v[j] && !cfg.pool_mode;
      wr_k[j]    = kk[j];
      wr_data[j] = dv[j];
    end
  end

  // max pooling
  data_t          pmax [NPU];
  logic [7:0]     pcnt [NPU];
  data_t          pnext [NPU];   // running maximum including this cycle's element
  logic [7:0]     kk2;
  assign kk2 = 8'(cfg.k) * 8'(cfg.k);

  always_comb
    for (int j = 0; j < NPU; j++)
      pnext[j] = (pcnt[j] == '0 || dv[j] > pmax[j]) ? dv[j] : pmax[j];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool_valid <= '0;
      pool_row   <= '0;
      for (int j = 0; j < NPU; j++) begin
        pmax[j] <= '0; pcnt[j] <= '0;
        pool_value[j] <= '0; pool_ch[j] <= '0; pool_col[j] <= '0;
      end
    end else begin
      pool_valid <= '0;
      for (int j = 0; j < NPU; j++) begin
        if (v[j] && cfg.pool_mode) begin
          if (pcnt[j] + 1'b1 == kk2) begin
            pool_valid[j] <= 1'b1;
            pool_value[j] <= pnext[j];
            pool_ch[j]    <= CHW'(kk[j] / RW'(kk2));
            pool_col[j]   <= grp_xbase + CW'(j);
            pool_row      <= grp_row;
            pcnt[j]       <= '0;
          end else begin
            pcnt[j] <= pcnt[j] + 1'b1;
          end
          pmax[j] <= pnext[j];
        end
      end
    end
  end
endmodule
