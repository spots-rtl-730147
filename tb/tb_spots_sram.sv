// tb_spots_sram: self-checking test of the SRAM model in both read modes.
//
// Instantiates a synchronous-read memory with two read ports and an
// asynchronous-read memory with one, writes random words to random
// addresses while reading random addresses, and compares every read with a
// reference array: synchronous reads must return the word stored at the
// address of the previous cycle (write-before-read: a read of the address
// written in the same cycle returns the old word), asynchronous reads the
// word stored now.
`timescale 1ns/1ps
module tb_spots_sram;
  localparam int WIDTH = 24, DEPTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [$clog2(DEPTH)-1:0] waddr, raddr_s [2], raddr_a [1];
  logic [WIDTH-1:0] wdata, rdata_s [2], rdata_a [1];

  spots_sram #(.WIDTH(WIDTH), .DEPTH(DEPTH), .NRD(2), .SYNC_READ(1'b1)) u_s (
    .clk, .we, .waddr, .wdata, .raddr(raddr_s), .rdata(rdata_s));
  spots_sram #(.WIDTH(WIDTH), .DEPTH(DEPTH), .NRD(1), .SYNC_READ(1'b0)) u_a (
    .clk, .we, .waddr, .wdata, .raddr(raddr_a), .rdata(rdata_a));

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WIDTH-1:0] ref_mem [DEPTH];
  logic [WIDTH-1:0] exp_s [2];

  initial begin
    we = 1;
    // initialise every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      waddr = 8'(a); wdata = WIDTH'($urandom); ref_mem[a] = wdata;
      raddr_s[0] = '0; raddr_s[1] = '0; raddr_a[0] = '0;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      we = ($urandom_range(1) == 1);
      waddr = 8'($urandom); wdata = WIDTH'($urandom);
      raddr_s[0] = 8'($urandom); raddr_s[1] = ($urandom_range(3) == 0) ? waddr : 8'($urandom);
      raddr_a[0] = 8'($urandom);
      #1;
      checks++;
      if (rdata_a[0] !== ref_mem[raddr_a[0]]) begin
        failures++; $display("async read %0d got %h exp %h", raddr_a[0], rdata_a[0], ref_mem[raddr_a[0]]);
      end
      exp_s[0] = ref_mem[raddr_s[0]]; exp_s[1] = ref_mem[raddr_s[1]];
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      for (int r = 0; r < 2; r++) begin
        checks++;
        if (rdata_s[r] !== exp_s[r]) begin
          failures++; $display("sync read port %0d got %h exp %h", r, rdata_s[r], exp_s[r]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
