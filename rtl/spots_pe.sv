// spots_pe: one processing element of the SPOTS GEMM systolic array.
//
// Output-stationary: the PE accumulates the products that belong to its own
// output elements. Weights arrive from the left and feature-map values from
// above, each into its own operand FIFO (the paper's "two FIFOs, one for each
// arriving input"). When both FIFO heads are present, the right neighbour's
// weight FIFO and the lower neighbour's feature FIFO have room and the MAC
// work queue (the paper's third FIFO) has room, the pair "fires": both
// operands move on to the neighbours and into the work queue. Because
// operands wait in the FIFOs for their partner, the array needs no skewing
// registers at its edges, as in the paper's Fig. 8(c) where weight d waits
// one cycle for A in PE(2,1). The weight FIFO depth is a parameter because
// the PE at the left edge of row i waits i cycles for its first feature
// value; systolic_array sizes it so that the array runs at full rate.
//
// A weight entry carries up to four weights: the four rows of the filter
// matrix this PE row handles (paper: K = 4 result registers). The MAC takes
// one work-queue entry in npass cycles, one pass per cycle, and adds
// w[p] * f to accumulator p. When either operand is zero the MAC is gated:
// the accumulator is not touched (the paper gates the MAC on a zero operand).
// The product of two 16-bit operands is added modulo 2^24 into the 24-bit
// accumulator; how the paper narrows the 32-bit product is not stated, so
// this truncation is this design's choice.
//
// Results leave through a shift chain: while 'drain' is high, accumulator
// drain_sel takes the value of the left neighbour's (acc_in) and shows its
// own on acc_out, so N drain cycles move a row of results out at the right
// edge (Fig. 8(b): results leave to the right) and clear the accumulators.
module spots_pe import spots_pkg::*; #(
  parameter int unsigned W_DEPTH  = 2,
  parameter int unsigned F_DEPTH  = 2,
  parameter int unsigned WQ_DEPTH = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  // weight operand from the left
  input  wvec_t       w_in,
  input  logic        w_valid,
  output logic        w_ready,
  // feature-map operand from above
  input  data_t       f_in,
  input  logic        f_valid,
  output logic        f_ready,
  // to the right neighbour
  output wvec_t       w_out,
  output logic        w_out_valid,
  input  logic        w_out_ready,
  // to the lower neighbour
  output data_t       f_out,
  output logic        f_out_valid,
  input  logic        f_out_ready,
  // passes per work entry (1..4), constant during a tile
  input  logic [2:0]  npass,
  // result drain chain
  input  logic        drain,
  input  logic [1:0]  drain_sel,
  input  acc_t        acc_in,
  output acc_t        acc_out,
  // status
  output logic        idle,
  output logic        mac_active,   // a MAC was performed this cycle
  output logic        mac_gated     // a MAC slot was gated by a zero operand
);
  localparam int unsigned WVW = $bits(wvec_t);

  logic [WVW-1:0] wq_head;
  logic [DW-1:0]  fq_head;
  logic           wq_empty, wq_full, fq_empty, fq_full;
  logic           fire;

  logic [WVW+DW-1:0] work_head;
  logic              work_empty, work_full;

  sync_fifo #(.WIDTH(WVW), .DEPTH(W_DEPTH)) u_wq (
    .clk, .rst_n, .push(w_valid), .wr_data(w_in), .pop(fire), .rd_data(wq_head),
    .empty(wq_empty), .full(wq_full), .count(), .space());

  sync_fifo #(.WIDTH(DW), .DEPTH(F_DEPTH)) u_fq (
    .clk, .rst_n, .push(f_valid), .wr_data(f_in), .pop(fire), .rd_data(fq_head),
    .empty(fq_empty), .full(fq_full), .count(), .space());

  assign w_ready = !wq_full;
  assign f_ready = !fq_full;

  assign fire        = !wq_empty && !fq_empty && w_out_ready && f_out_ready && !work_full;
  assign w_out       = wq_head;
  assign w_out_valid = fire;
  assign f_out       = fq_head;
  assign f_out_valid = fire;

  // MAC work queue
  logic [1:0] pc;          // current pass within the head entry
  logic       work_pop;
  wvec_t      cur_w;
  data_t      cur_f;

  sync_fifo #(.WIDTH(WVW+DW), .DEPTH(WQ_DEPTH)) u_work (
    .clk, .rst_n, .push(fire), .wr_data({wq_head, fq_head}), .pop(work_pop),
    .rd_data(work_head), .empty(work_empty), .full(work_full), .count(), .space());

  assign cur_w    = work_head[DW +: WVW];
  assign cur_f    = work_head[DW-1:0];
  assign work_pop = !work_empty && ({1'b0, pc} == npass - 3'd1);

  acc_t acc [PASSES];
  logic signed [2*DW-1:0] prod;
  logic  operand_zero;

  assign prod         = cur_w[pc] * cur_f;
  assign operand_zero = (cur_w[pc] == '0) || (cur_f == '0);
  assign mac_active   = !work_empty && !operand_zero;
  assign mac_gated    = !work_empty && operand_zero;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0;
      for (int i = 0; i < PASSES; i++) acc[i] <= '0;
    end else begin
      if (drain) begin
        acc[drain_sel] <= acc_in;
      end else if (!work_empty) begin
        if (!operand_zero) acc[pc] <= acc[pc] + acc_t'(prod);
        pc <= work_pop ? 2'd0 : pc + 2'd1;
      end
    end
  end

  assign acc_out = acc[drain_sel];
  assign idle    = wq_empty && fq_empty && work_empty;

`ifndef SYNTHESIS
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(drain && !idle)) else $error("spots_pe: drain while busy");
      assert (work_empty || (npass != 3'd0 && npass <= 3'(PASSES))) else $error("spots_pe: bad npass");
    end
  end
`endif
endmodule
