// gemm_output_ctrl: output controller of the GEMM unit (paper Fig. 5).
//
// After a tile the accumulators of the output-stationary array hold the
// results. On drain_req the controller runs the drain chain: for each
// accumulator p < npass it shifts the array N times to the right; each cycle
// the M values leaving the right edge (one per row, i.e. one per filter of
// pass p, for one patch column) are written as one word to the ofmap SRAM at
//   addr = (tile*N + column)*PASSES + p        (modulo the SRAM depth).
// Word bit slice [r*AW +: AW] is array row r: filter p*M + r in tall mode, and
// in multi mode filter p*(M/NSUB) + (r mod M/NSUB) of the patch group of
// sub-array r div (M/NSUB). The drain clears the accumulators for the next
// tile. The paper does not describe this controller beyond its name; the
// drain chain and the word layout are this design's choices.
// of_wdata is row_result passed straight through: the array's drain chain
// already presents one ofmap word per cycle, so the controller only sequences
// the drain and generates addresses.
module gemm_output_ctrl import spots_pkg::*; #(
  parameter int unsigned M   = 128,
  parameter int unsigned N   = 4,
  parameter int unsigned OFA = 10,     // ofmap SRAM address width
  parameter int unsigned TW  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [2:0]        npass,
  input  logic              drain_req,
  input  logic [TW-1:0]     drain_tile,
  output logic              drain_done,
  // array drain chain
  output logic              drain,
  output logic [1:0]        drain_sel,
  input  acc_t              row_result [M],
  // ofmap SRAM write port
  output logic              of_we,
  output logic [OFA-1:0]    of_waddr,
  output logic [M*AW-1:0]   of_wdata
);
  logic          busy;
  logic [1:0]    p;
  logic [$clog2(N+1)-1:0] step;
  logic [TW-1:0] tile;
  logic [$clog2(N)-1:0] col;

  assign drain     = busy;
  assign drain_sel = p;
  assign col       = $clog2(N)'(N - 1 - 32'(step));
  assign of_we     = busy;
  assign of_waddr  = OFA'((32'(tile) * N + 32'(col)) * PASSES + 32'(p));
  always_comb
    for (int r = 0; r < M; r++) of_wdata[r*AW +: AW] = row_result[r];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      p          <= '0;
      step       <= '0;
      tile       <= '0;
      drain_done <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      if (drain_req) begin
        busy <= 1'b1;
        p    <= '0;
        step <= '0;
        tile <= drain_tile;
      end else if (busy) begin
        if (32'(step) == N - 1) begin
          step <= '0;
          if ({1'b0, p} == npass - 3'd1) begin
            busy       <= 1'b0;
            drain_done <= 1'b1;
          end else p <= p + 1'b1;
        end else step <= step + 1'b1;
      end
    end
  end
endmodule
