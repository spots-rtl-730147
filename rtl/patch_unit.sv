// patch_unit: one Patch Unit (PU) of the IM2COL unit.
//
// A PU builds one patch (the K x K x C window of the input feature map under
// one filter position) at a time and streams it out in order: channel by
// channel, each channel's K x K window in row-major order, tagged with its
// IM2COL row index k = (ch*K + ky)*K + kx. Three buffers feed it (paper
// Sec. 3.1, Fig. 6 right):
//   N  new buffer      - elements fetched from the ifmap SRAM by the input
//                        controller (FIFO, in consumption order);
//   G  neighbour buffer- elements forwarded by the PU on the left, whose patch
//                        overlaps this one horizontally (FIFO);
//   R  reserved buffer - elements this PU kept from its patch in the previous
//                        round (the patch one stride above), addressed memory.
// For each position the control unit takes the element from G when the left
// patch covers it, else from R when the patch above covers it and the
// reserve is in use, else from N (spots_pkg::pos_src; the input controller
// applies the same rule to decide what to fetch). While emitting it also
//   - forwards the element to the right PU when the right patch (one stride
//     to the right) covers it: kx >= S;
//   - keeps it in R for the next round when the patch below covers it
//     (ky >= S), unless it came from G, since the left neighbour will supply
//     it again next round (Fig. 7: PU2 keeps A8 but not A7).
// Elements carry their feature-map row and column (paper: coordinates are
// stored with each value); the PU derives the IM2COL row index from them and
// checks them against the position it expects.
//
// R is split in two halves by round parity (read the half written in the
// previous round, write the other), with a per-patch base address chosen by
// the input controller; this split is this design's choice. The PU emits at
// most one element per cycle and stalls when its source is empty, when the
// right PU's G is full or when out_ready is low.
//
// Start: pulse 'start' with the patch origin (px,py), the neighbour flags and
// the R base addresses; 'busy' stays high until the last element has left.
module patch_unit import spots_pkg::*; #(
  parameter int unsigned N_DEPTH = 4,
  parameter int unsigned G_DEPTH = 256,
  parameter int unsigned R_DEPTH = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer shape
  input  logic [KW-1:0]     k,
  input  logic [KW-1:0]     s,
  input  logic [CHW-1:0]    c,
  // patch command
  input  logic              start,
  input  logic [CW-1:0]     px,
  input  logic [CW-1:0]     py,
  input  logic              has_left,
  input  logic              has_right,
  input  logic              has_up,
  input  logic              has_down,
  input  logic [$clog2(R_DEPTH)-1:0] r_rd_base,
  input  logic [$clog2(R_DEPTH)-1:0] r_wr_base,
  output logic              busy,
  // new elements from the input controller
  input  logic              n_push,
  input  elem_t             n_data,
  output logic [$clog2(N_DEPTH+1)-1:0] n_space,
  // neighbour elements from the left PU
  input  logic              g_push,
  input  elem_t             g_data,
  output logic              g_ready,
  // forward to the right PU
  output logic              fwd_valid,
  output elem_t             fwd_data,
  input  logic              fwd_ready,
  // output patch stream
  output logic              out_valid,
  output logic [RW-1:0]     out_k,
  output data_t             out_value,
  input  logic              out_ready,
  // activity, one pulse per element taken from each source
  output logic              took_new,
  output logic              took_nbr,
  output logic              took_res
);
  localparam int unsigned RAW = $clog2(R_DEPTH);
  localparam int unsigned EW  = $bits(elem_t);

  logic [EW-1:0] n_head, g_head;
  logic          n_empty, g_empty, g_full;
  logic          go;
  src_e          src;

  logic [CHW-1:0] ch;
  logic [KW-1:0]  ky, kx;
  logic [RW-1:0]  kbase;     // ch*K*K
  logic [RAW-1:0] roff, woff;

  sync_fifo #(.WIDTH(EW), .DEPTH(N_DEPTH)) u_n (
    .clk, .rst_n, .push(n_push), .wr_data(n_data), .pop(go && src == SRC_NEW),
    .rd_data(n_head), .empty(n_empty), .full(), .count(), .space(n_space));

  sync_fifo #(.WIDTH(EW), .DEPTH(G_DEPTH)) u_g (
    .clk, .rst_n, .push(g_push), .wr_data(g_data), .pop(go && src == SRC_NBR),
    .rd_data(g_head), .empty(g_empty), .full(g_full), .count(), .space());
  assign g_ready = !g_full;

  data_t rmem [R_DEPTH];

  logic  avail, need_fwd, keep_r, last_pos;
  elem_t cur;
  logic [CW-1:0] dy, dx;

  assign src      = pos_src(k, s, ky, kx, has_left, has_up);
  assign need_fwd = has_right && (kx >= s);
  assign keep_r   = has_down && (ky >= s) && (src != SRC_NBR);
  assign last_pos = (ch == c - 1'b1) && (ky == k - 1'b1) && (kx == k - 1'b1);

  always_comb begin
    unique case (src)
      SRC_NEW: begin avail = !n_empty; cur = elem_t'(n_head); end
      SRC_NBR: begin avail = !g_empty; cur = elem_t'(g_head); end
      default: begin
        avail     = 1'b1;
        cur.value = rmem[r_rd_base + roff];
        cur.row   = py + CW'(ky);
        cur.col   = px + CW'(kx);
      end
    endcase
  end

  assign go = busy && avail && out_ready && (!need_fwd || fwd_ready);

  assign dy        = cur.row - py;
  assign dx        = cur.col - px;
  assign out_valid = go;
  assign out_value = cur.value;
  assign out_k     = kbase + RW'(dy) * RW'(k) + RW'(dx);
  assign fwd_valid = go && need_fwd;
  assign fwd_data  = cur;
  assign took_new  = go && src == SRC_NEW;
  assign took_nbr  = go && src == SRC_NBR;
  assign took_res  = go && src == SRC_RES;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      ch    <= '0;
      ky    <= '0;
      kx    <= '0;
      kbase <= '0;
      roff  <= '0;
      woff  <= '0;
    end else if (start) begin
      busy  <= 1'b1;
      ch    <= '0;
      ky    <= '0;
      kx    <= '0;
      kbase <= '0;
      roff  <= '0;
      woff  <= '0;
    end else if (go) begin
      if (ky < k - s) roff <= roff + 1'b1;
      if (ky >= s)    woff <= woff + 1'b1;
      if (kx == k - 1'b1) begin
        kx <= '0;
        if (ky == k - 1'b1) begin
          ky    <= '0;
          ch    <= ch + 1'b1;
          kbase <= kbase + RW'(k) * RW'(k);
        end else begin
          ky <= ky + 1'b1;
        end
      end else begin
        kx <= kx + 1'b1;
      end
      if (last_pos) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (go && keep_r) rmem[r_wr_base + woff] <= cur.value;
  end

`ifndef SYNTHESIS
  always_ff @(posedge clk) begin
    if (rst_n && go) begin
      assert (dy == CW'(ky) && dx == CW'(kx))
        else $error("patch_unit: element (%0d,%0d) arrived for position (%0d,%0d)",
                    cur.row, cur.col, py + CW'(ky), px + CW'(kx));
    end
    if (rst_n) assert (!(start && busy)) else $error("patch_unit: start while busy");
  end
`endif
endmodule
