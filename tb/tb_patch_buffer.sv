// tb_patch_buffer: self-checking test of the IM2COL/GEMM double buffer and
// of the compress unit that watches its write ports (default sizes).
//
// A writer process fills whole banks with random rows, some rows entirely
// zero, through the per-column write ports, then commits; a reader process,
// running concurrently at a different random pace, waits for a full bank,
// reads every row back, checks the data against what was written to that
// bank and checks the compress bit of the row (1 exactly when some value of
// the row is non-zero), then releases the bank. The writer must see the bank
// as not free until the reader released it. Checks that the two banks
// alternate and that writing the next bank overlaps reading the current one.
`timescale 1ns/1ps
module tb_patch_buffer;
  import spots_pkg::*;
  localparam int NCOL = 4, DEPTH = 4608, ROWS = 300, NB = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCOL-1:0] wr_en;
  logic [RW-1:0] wr_k [NCOL], rd_k;
  data_t wr_data [NCOL], rd_data [NCOL];
  logic commit, wr_free, wr_bank, release_bank, rd_full, rd_bank, rd_nonzero;

  patch_buffer dut (.*);
  compress u_cmp (.clk, .rst_n, .wr_en, .wr_k, .wr_data, .wr_bank, .rd_bank, .release_bank,
                  .rd_k, .rd_nonzero);

  int checks = 0, failures = 0, errs = 0, overlap = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int data [NB][ROWS][NCOL];
  bit reading = 0;

  initial begin : writer
    wr_en = '0; commit = 0;
    foreach (wr_k[j]) begin wr_k[j] = '0; wr_data[j] = '0; end
    wait (rst_n);
    for (int b = 0; b < NB; b++) begin
      for (int r = 0; r < ROWS; r++) begin
        bit zero_row;
        zero_row = ($urandom_range(3) == 0);
        for (int j = 0; j < NCOL; j++)
          data[b][r][j] = (zero_row || $urandom_range(2) == 0) ? 0 : int'($urandom_range(60000)) - 30000;
      end
      @(negedge clk);
      while (!wr_free) @(negedge clk);
      checks++;
      if (wr_bank != 1'(b & 1)) begin failures++; $display("write bank %0d for block %0d", wr_bank, b); end
      // write rows in a scrambled order, one column port per value
      for (int r0 = 0; r0 < ROWS; r0++) begin
        int r;
        r = (r0 * 7) % ROWS;
        for (int j = 0; j < NCOL; j++) begin
          wr_en[j] = 1; wr_k[j] = RW'(r); wr_data[j] = data_t'(data[b][r][j]);
        end
        @(negedge clk);
        if (reading) overlap++;
        wr_en = '0;
        if ($urandom_range(4) == 0) @(negedge clk);
      end
      commit = 1; @(negedge clk); commit = 0;
    end
  end

  initial begin : reader
    release_bank = 0; rd_k = '0;
    wait (rst_n);
    for (int b = 0; b < NB; b++) begin
      @(negedge clk);
      while (!rd_full) @(negedge clk);
      reading = 1;
      checks++;
      if (rd_bank != 1'(b & 1)) begin failures++; $display("read bank %0d for block %0d", rd_bank, b); end
      for (int r = 0; r < ROWS; r++) begin
        bit nz;
        rd_k = RW'(r);
        #1;
        nz = 0;
        for (int j = 0; j < NCOL; j++) begin
          if (data[b][r][j] != 0) nz = 1;
          checks++;
          if (int'(rd_data[j]) != data[b][r][j]) begin
            failures++;
            if (errs++ < 10) $display("block %0d row %0d col %0d got %0d exp %0d", b, r, j, rd_data[j], data[b][r][j]);
          end
        end
        checks++;
        if (rd_nonzero != nz) begin
          failures++;
          if (errs++ < 10) $display("block %0d row %0d compress bit %0d exp %0d", b, r, rd_nonzero, nz);
        end
        repeat ($urandom_range(2)) @(negedge clk);
        @(negedge clk);
      end
      reading = 0;
      release_bank = 1; @(negedge clk); release_bank = 0;
    end
    checks++;
    if (overlap == 0) begin failures++; $display("writing never overlapped reading"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
  end
endmodule
