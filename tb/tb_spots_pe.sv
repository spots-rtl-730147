// tb_spots_pe: self-checking test of one processing element.
//
// Pushes random weight vectors and feature values (about a third zero) into
// the PE with npass = 1..4, checks that both operands are forwarded
// unchanged and in order to the right and lower outputs, that the four
// accumulators equal the sums computed here, that zero operands gate the
// MAC, and that a pair pushed into an empty PE is accumulated within
// npass + 2 cycles. Results are read and cleared through the drain chain.
`timescale 1ns/1ps
module tb_spots_pe;
  import spots_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wvec_t w_in, w_out; data_t f_in, f_out; acc_t acc_in, acc_out;
  logic w_valid, w_ready, f_valid, f_ready, w_out_valid, f_out_valid;
  logic w_out_ready, f_out_ready, drain, idle, mac_active, mac_gated;
  logic [1:0] drain_sel; logic [2:0] npass;

  spots_pe dut (.*);

  int checks = 0, failures = 0, gated = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  wvec_t wq [$]; data_t fq [$];
  bit bp_on = 1;
  // random back-pressure from the right and lower neighbours
  always @(negedge clk) begin
    w_out_ready <= !bp_on || ($urandom_range(3) != 0);
    f_out_ready <= !bp_on || ($urandom_range(3) != 0);
  end
  always @(posedge clk) begin
    if (rst_n && w_out_valid) begin
      wvec_t e; e = wq.pop_front();
      checks++; if (w_out !== e) begin failures++; $display("w_out mismatch"); end
    end
    if (rst_n && f_out_valid) begin
      data_t e; e = fq.pop_front();
      checks++; if (f_out !== e) begin failures++; $display("f_out mismatch"); end
    end
    if (rst_n && mac_gated) gated++;
  end

  function automatic data_t rv();
    return ($urandom_range(2) == 0) ? data_t'(0) : data_t'(int'($urandom_range(200)) - 100);
  endfunction

  task automatic drain_check(acc_t exp [PASSES], int np);
    for (int p = 0; p < PASSES; p++) begin
      @(negedge clk);
      drain = 1; drain_sel = 2'(p); acc_in = '0;
      #1;
      checks++;
      if (acc_out !== (p < np ? exp[p] : acc_t'(0))) begin
        failures++; $display("acc[%0d] got %0d exp %0d", p, acc_out, exp[p]);
      end
    end
    @(negedge clk); drain = 0;
  endtask

  initial begin
    acc_t exp [PASSES];
    w_valid = 0; f_valid = 0; drain = 0; drain_sel = 0;
    acc_in = 0; npass = 3'd1; w_in = '0; f_in = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int np = 1; np <= PASSES; np++) begin
      npass = 3'(np);
      bp_on = 1;
      foreach (exp[i]) exp[i] = '0;
      for (int n = 0; n < 40; n++) begin
        wvec_t w; data_t f;
        foreach (w[i]) w[i] = rv();
        f = rv();
        @(negedge clk);
        while (!(w_ready && f_ready)) @(negedge clk);
        w_in = w; f_in = f; w_valid = 1; f_valid = 1;
        wq.push_back(w); fq.push_back(f);
        for (int p = 0; p < np; p++) exp[p] = exp[p] + acc_t'(w[p] * f);
        @(negedge clk); w_valid = 0; f_valid = 0;
      end
      bp_on = 0;
      while (!idle) @(negedge clk);
      drain_check(exp, np);
    end
    // latency: one pair into an idle PE
    npass = 3'd2;
    @(negedge clk);
    w_in = '{default: data_t'(3)}; f_in = data_t'(5); w_valid = 1; f_valid = 1;
    wq.push_back(w_in); fq.push_back(f_in);
    @(negedge clk); w_valid = 0; f_valid = 0;
    repeat (3) @(negedge clk);   // npass + 1 cycles after the push edge
    checks++;
    if (!idle) begin failures++; $display("pair not finished within npass+2 cycles"); end
    foreach (exp[i]) exp[i] = (i < 2) ? acc_t'(15) : acc_t'(0);
    drain_check(exp, 2);
    checks++;
    if (gated == 0) begin failures++; $display("MAC gating never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
