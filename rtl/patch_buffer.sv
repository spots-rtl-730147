// patch_buffer: the double buffer between an IM2COL unit and the GEMM unit
// (paper Fig. 5, "Buffer 1" and "Buffer 2").
//
// Two banks, each holding NCOL columns of DEPTH IM2COL rows. The IM2COL side
// writes one bank (one write port per column) while the GEMM side reads the
// other, so patch building for the next tile overlaps the GEMM of the
// current one. 'commit' marks the write bank full and moves writing to the
// other bank; 'release' marks the read bank empty and moves reading on.
// wr_free tells the writer its bank is empty; rd_full tells the reader its
// bank is full. The read port returns a whole IM2COL row (one value per
// column) combinationally. Bank sizes follow from the largest layer of the
// evaluated networks (K*K*C = 3*3*512 = 4608 rows); the paper gives only the
// total of its IM2COL SRAM buffers (2 MB).
module patch_buffer import spots_pkg::*; #(
  parameter int unsigned NCOL  = 4,
  parameter int unsigned DEPTH = 4608
) (
  input  logic             clk,
  input  logic             rst_n,
  // write side (IM2COL)
  input  logic [NCOL-1:0]  wr_en,
  input  logic [RW-1:0]    wr_k    [NCOL],
  input  data_t            wr_data [NCOL],
  input  logic             commit,
  output logic             wr_free,
  output logic             wr_bank,
  // read side (GEMM)
  input  logic [RW-1:0]    rd_k,
  output data_t            rd_data [NCOL],
  input  logic             release_bank,
  output logic             rd_full,
  output logic             rd_bank
);
  data_t mem [2][NCOL][DEPTH];
  logic [1:0] full;

  assign wr_free = !full[wr_bank];
  assign rd_full = full[rd_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full    <= '0;
      wr_bank <= 1'b0;
      rd_bank <= 1'b0;
    end else begin
      if (commit) begin
        full[wr_bank] <= 1'b1;
        wr_bank       <= !wr_bank;
      end
      if (release_bank) begin
        full[rd_bank] <= 1'b0;
        rd_bank       <= !rd_bank;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < NCOL; j++)
      if (wr_en[j]) mem[wr_bank][j][wr_k[j]] <= wr_data[j];
  end

  always_comb
    for (int j = 0; j < NCOL; j++) rd_data[j] = mem[rd_bank][j][rd_k];

`ifndef SYNTHESIS
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(commit && full[wr_bank])) else $error("patch_buffer: commit into a full bank");
      assert (!(|wr_en && full[wr_bank])) else $error("patch_buffer: write into a full bank");
      assert (!(release_bank && !full[rd_bank])) else $error("patch_buffer: release of an empty bank");
    end
  end
`endif
endmodule
