// sync_fifo: single-clock first-in first-out queue (helper).
//
// A circular buffer of DEPTH entries of WIDTH bits with a registered count.
// push is ignored when full and pop when empty; an assertion flags either
// misuse. rd_data shows the head entry combinationally (first-word
// fall-through), so a consumer sees an entry the cycle after it is pushed.
// 'space' is the number of free entries, used by producers that have reads
// in flight. Reset empties the queue; the storage itself is not cleared.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] space
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNTW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == CNTW'(DEPTH));
  assign space   = CNTW'(DEPTH) - count;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CNTW'(do_push) - CNTW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

`ifndef SYNTHESIS
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(push && full))  else $error("sync_fifo: push while full");
      assert (!(pop && empty))  else $error("sync_fifo: pop while empty");
    end
  end
`endif
endmodule
