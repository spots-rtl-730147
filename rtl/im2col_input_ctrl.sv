// im2col_input_ctrl: input controller of one IM2COL unit.
//
// Walks the output positions of a layer in groups of NPU horizontally
// adjacent patches ("rounds" are rows of patches, paper Fig. 7). Patch x of a
// round always goes to PU x mod NPU, so a PU meets the same patch column in
// every round and can reuse what it reserved (paper: "We assign all patches
// that belong to the same column ... in different rounds to the same PU").
// With several IM2COL units (multi-array mode) the groups of a round are
// dealt round-robin, unit u taking groups u, u+U, ...; every unit runs the
// same number of groups per round, the missing ones empty, so that the small
// GEMM arrays stay in step.
//
// For each group it
//   1. waits until its patch-buffer bank is free (not in pooling mode);
//   2. decides per PU where its elements come from: the left PU when the
//      patches overlap (K > S), the reserved buffer when the patch above was
//      built in the previous round and the reserve is large enough, else the
//      ifmap SRAM. The ring link from the last PU back to the first is used
//      only with one unit and when a whole patch column's overlap
//      (K*(K-S)*C elements) fits the neighbour FIFO; the reserve only when
//      2*groups*C*K*(K-S) elements fit it. Otherwise elements are fetched
//      again, as the paper does when the reserve is too small;
//   3. starts the PUs and fetches, one SRAM read per cycle shared
//      round-robin among the PUs, exactly the elements each PU will take from
//      its new buffer, in the order it takes them;
//   4. when stride >= kernel size nothing overlaps: the PUs are bypassed and
//      fetched elements go straight to the output controller (paper: "the
//      input control forwards its output directly to the output controller
//      by skipping the PUs");
//   5. when all PUs are idle, commits the group to the patch buffer.
// The ifmap SRAM holds channel-major rows: addr = (ch*H + row)*W + col; its
// read data arrive one cycle after the address. No zero padding is applied
// (the paper does not describe padding): a padded layer needs a padded ifmap.
module im2col_input_ctrl import spots_pkg::*; #(
  parameter int unsigned NPU      = 4,
  parameter int unsigned N_DEPTH  = 4,
  parameter int unsigned G_DEPTH  = 256,
  parameter int unsigned R_DEPTH  = 4096,
  parameter int unsigned FA       = 18    // ifmap SRAM address width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic [2:0]           unit_id,
  input  logic [2:0]           n_units,     // 1 (tall mode) or NSUB
  input  logic                 start,
  output logic                 done,        // level, until next start
  // patch buffer handshake
  input  logic                 bank_free,
  output logic                 commit,
  // ifmap SRAM read port
  output logic                 rd_en,
  output logic [FA-1:0]        rd_addr,
  input  data_t                rd_data,
  // patch units
  output logic [NPU-1:0]       pu_start,
  output logic [CW-1:0]        pu_px      [NPU],
  output logic [CW-1:0]        pu_py      [NPU],
  output logic [NPU-1:0]       pu_left,
  output logic [NPU-1:0]       pu_right,
  output logic [NPU-1:0]       pu_up,
  output logic [NPU-1:0]       pu_down,
  output logic [$clog2(R_DEPTH)-1:0] pu_rrd,
  output logic [$clog2(R_DEPTH)-1:0] pu_rwr,
  input  logic [NPU-1:0]       pu_busy,
  output logic [NPU-1:0]       n_push,
  output elem_t                n_data,
  input  logic [$clog2(N_DEPTH+1)-1:0] n_space [NPU],
  // bypass stream to the output controller
  output logic                 byp_valid,
  output logic [$clog2(NPU)-1:0] byp_col,
  output logic [RW-1:0]        byp_k,
  output data_t                byp_value,
  // group being built (for pooling results)
  output logic [CW-1:0]        grp_row,
  output logic [CW-1:0]        grp_xbase,
  output logic                 bypass
);
  localparam int unsigned RAW = $clog2(R_DEPTH);
  localparam int unsigned PIW = $clog2(NPU);

  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_WAIT, S_START, S_RUN, S_NEXT, S_DONE} state_e;
  state_e st;

  // layer constants, computed at start
  logic [CW-1:0]  ngroups, lgcnt;       // groups per round, groups per unit per round
  logic [KW-1:0]  ov;                   // K - S
  logic           wrap_ok, reserve_ok;
  logic [31:0]    per;                  // C*K*(K-S): reserve words per patch per round

  // position in the layer
  logic [CW-1:0]  ry, lg;
  logic [CW-1:0]  grp;                  // global group index within the round

  // per-PU fetch walkers
  logic [NPU-1:0] pvalid, fdone;
  logic [CHW-1:0] fch [NPU];
  logic [KW-1:0]  fky [NPU], fkx [NPU];
  logic [RW-1:0]  fk  [NPU];
  logic [NPU-1:0] want, wants_skip;
  logic [PIW-1:0] rr, gsel;
  logic           gnt;
  logic           inflight;
  logic [PIW-1:0] inflight_pu;
  elem_t          inflight_elem;
  logic [RW-1:0]  inflight_k;

  assign grp       = lg * CW'(n_units) + CW'(unit_id);
  assign grp_row   = ry;
  assign grp_xbase = grp * CW'(NPU);
  assign done      = (st == S_DONE);

  // per-PU flags for the current group
  always_comb begin
    for (int p = 0; p < NPU; p++) begin
      logic [CW-1:0] xi;
      xi = grp * CW'(NPU) + CW'(p);
      pvalid[p]   = xi < cfg.wout;
      pu_px[p]    = xi * CW'(cfg.s);
      pu_py[p]    = ry * CW'(cfg.s);
      pu_left[p]  = !bypass && pvalid[p] && ((p > 0) || (wrap_ok && grp != '0));
      pu_right[p] = !bypass && pvalid[p] && (xi + 1'b1 < cfg.wout) && ((p < NPU-1) || wrap_ok);
      pu_up[p]    = !bypass && reserve_ok && (ry != '0);
      pu_down[p]  = !bypass && reserve_ok && (ry + 1'b1 < cfg.hout);
    end
  end
  assign pu_rrd = RAW'(({31'b0, ry[0]} * 32'(lgcnt) + 32'(lg)) * per);
  assign pu_rwr = RAW'(({31'b0, ~ry[0]} * 32'(lgcnt) + 32'(lg)) * per);

  // fetch requests: a walker at a position its PU takes from the new buffer
  always_comb begin
    for (int p = 0; p < NPU; p++) begin
      logic is_new;
      is_new = pos_src(cfg.k, cfg.s, fky[p], fkx[p], pu_left[p], pu_up[p]) == SRC_NEW;
      want[p]       = (st == S_RUN) && !fdone[p] && is_new &&
                      (bypass || n_space[p] > ((inflight && inflight_pu == PIW'(p)) ? 1 : 0));
      wants_skip[p] = (st == S_RUN) && !fdone[p] && !is_new;
    end
    gnt  = 1'b0;
    gsel = '0;
    for (int i = 0; i < NPU; i++) begin
      logic [PIW-1:0] cand;
      cand = PIW'(rr + PIW'(i));
      if (!gnt && want[cand]) begin
        gnt  = 1'b1;
        gsel = cand;
      end
    end
  end

  assign rd_en   = gnt;
  assign rd_addr = FA'((32'(fch[gsel]) * 32'(cfg.h) + 32'(pu_py[gsel]) + 32'(fky[gsel])) * 32'(cfg.w)
                   + 32'(pu_px[gsel]) + 32'(fkx[gsel]));

  // read data return
  always_comb begin
    n_push        = '0;
    n_data        = inflight_elem;
    n_data.value  = rd_data;
    byp_valid     = inflight && bypass;
    byp_col       = inflight_pu;
    byp_k         = inflight_k;
    byp_value     = rd_data;
    if (inflight && !bypass) n_push[inflight_pu] = 1'b1;
  end

  function automatic logic last_of(input logic [CHW-1:0] ch_i, input logic [KW-1:0] y_i,
                                   input logic [KW-1:0] x_i, input layer_cfg_t cf);
    return (ch_i == cf.c - 1'b1) && (y_i == cf.k - 1'b1) && (x_i == cf.k - 1'b1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      ngroups    <= '0;
      lgcnt      <= '0;
      ov         <= '0;
      wrap_ok    <= 1'b0;
      reserve_ok <= 1'b0;
      bypass     <= 1'b0;
      per        <= '0;
      ry         <= '0;
      lg         <= '0;
      fdone      <= '0;
      rr         <= '0;
      inflight   <= 1'b0;
      inflight_pu <= '0;
      inflight_elem <= '0;
      inflight_k <= '0;
      pu_start   <= '0;
      commit     <= 1'b0;
      for (int p = 0; p < NPU; p++) begin
        fch[p] <= '0; fky[p] <= '0; fkx[p] <= '0; fk[p] <= '0;
      end
    end else begin
      pu_start <= '0;
      commit   <= 1'b0;
      inflight <= gnt;
      if (gnt) begin
        inflight_pu         <= gsel;
        inflight_elem.row   <= pu_py[gsel] + CW'(fky[gsel]);
        inflight_elem.col   <= pu_px[gsel] + CW'(fkx[gsel]);
        inflight_elem.value <= '0;
        inflight_k          <= fk[gsel];
        rr                  <= gsel + 1'b1;
      end
      unique case (st)
        S_IDLE: if (start) st <= S_SETUP;
        S_SETUP: begin
          // groups per round and per unit
          ngroups    <= CW'((32'(cfg.wout) + NPU - 1) / NPU);
          lgcnt      <= CW'(((32'(cfg.wout) + NPU - 1) / NPU + 32'(n_units) - 1) / 32'(n_units));
          ov         <= (cfg.k > cfg.s) ? cfg.k - cfg.s : '0;
          bypass     <= !(cfg.k > cfg.s);
          per        <= 32'(cfg.c) * 32'(cfg.k) * 32'((cfg.k > cfg.s) ? cfg.k - cfg.s : '0);
          ry         <= '0;
          lg         <= '0;
          st         <= S_WAIT;
        end
        S_WAIT: begin
          wrap_ok    <= (cfg.k > cfg.s) && (n_units == 3'd1) &&
                        (32'(cfg.c) * 32'(cfg.k) * 32'(ov) <= G_DEPTH);
          reserve_ok <= (cfg.k > cfg.s) && (2 * 32'(lgcnt) * per <= R_DEPTH);
          if (bank_free || cfg.pool_mode) st <= S_START;
        end
        S_START: begin
          for (int p = 0; p < NPU; p++) begin
            fch[p] <= '0; fky[p] <= '0; fkx[p] <= '0; fk[p] <= '0;
          end
          fdone    <= ~pvalid;
          pu_start <= bypass ? '0 : pvalid;
          st       <= S_RUN;
        end
        S_RUN: begin
          for (int p = 0; p < NPU; p++) begin
            if ((gnt && gsel == PIW'(p)) || wants_skip[p]) begin
              fk[p] <= fk[p] + 1'b1;
              if (last_of(fch[p], fky[p], fkx[p], cfg)) fdone[p] <= 1'b1;
              if (fkx[p] == cfg.k - 1'b1) begin
                fkx[p] <= '0;
                if (fky[p] == cfg.k - 1'b1) begin
                  fky[p] <= '0;
                  fch[p] <= fch[p] + 1'b1;
                end else fky[p] <= fky[p] + 1'b1;
              end else fkx[p] <= fkx[p] + 1'b1;
            end
          end
          if (&fdone && !gnt && !inflight && pu_busy == '0) begin
            commit <= !cfg.pool_mode;
            st     <= S_NEXT;
          end
        end
        S_NEXT: begin
          if (lg + 1'b1 == lgcnt) begin
            lg <= '0;
            if (ry + 1'b1 == cfg.hout) st <= S_DONE;
            else begin
              ry <= ry + 1'b1;
              st <= S_WAIT;
            end
          end else begin
            lg <= lg + 1'b1;
            st <= S_WAIT;
          end
        end
        S_DONE: if (start) st <= S_SETUP;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
