// compress: zero-block detector between the IM2COL unit and the GEMM unit
// (paper Sec. 3.3 and Fig. 5, "Compress").
//
// A block is one row of the IM2COL result as it enters the array: the NCOL
// values at one IM2COL row index k, one per array column. The unit watches
// the patch-buffer write ports and keeps, per buffer bank, one bit per row:
// 1 when any value written to that row is non-zero, 0 when the whole row is
// zero (the paper: "If all elements in a block ... are zeros, the bit is set
// to zero for that block; otherwise, the bit set to one"). The GEMM input
// controller reads the bit of the row it is about to stream and skips the
// row when it is 0. A bank's bitmap is cleared when the bank is released.
// Building the bitmap while the buffer is written, not by reading the buffer
// back, is this design's choice; it costs no extra buffer reads.
module compress import spots_pkg::*; #(
  parameter int unsigned NCOL  = 4,
  parameter int unsigned DEPTH = 4608
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NCOL-1:0]  wr_en,
  input  logic [RW-1:0]    wr_k    [NCOL],
  input  data_t            wr_data [NCOL],
  input  logic             wr_bank,
  input  logic             rd_bank,
  input  logic             release_bank,
  input  logic [RW-1:0]    rd_k,
  output logic             rd_nonzero
);
  logic [DEPTH-1:0] bitmap [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitmap[0] <= '0;
      bitmap[1] <= '0;
    end else begin
      for (int j = 0; j < NCOL; j++)
        if (wr_en[j] && wr_data[j] != '0) bitmap[wr_bank][wr_k[j]] <= 1'b1;
      if (release_bank) bitmap[rd_bank] <= '0;
    end
  end

  assign rd_nonzero = bitmap[rd_bank][rd_k];
endmodule
