// spots_sram: behaviour of an on-chip SRAM of SPOTS (ifmap, filter banks,
// filter metadata, ofmap; paper Fig. 5 and Table 1).
//
// A memory array with one write port and NRD read ports. With SYNC_READ = 1
// a read returns its data the cycle after the address (the usual SRAM
// macro behaviour); with SYNC_READ = 0 the read is combinational, which is
// how the small metadata and filter-bank memories are modelled so that the
// GEMM input controller can use a value in the cycle it addresses it. The
// paper models its SRAMs with Cacti and gives only their sizes, so port
// counts and read timing are this design's choices. The contents are not
// reset.
module spots_sram #(
  parameter int unsigned WIDTH     = 16,
  parameter int unsigned DEPTH     = 1024,
  parameter int unsigned NRD       = 1,
  parameter bit          SYNC_READ = 1'b1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr [NRD],
  output logic [WIDTH-1:0]         rdata [NRD]
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  for (genvar r = 0; r < NRD; r++) begin : g_rd
    if (SYNC_READ) begin : g_sync
      always_ff @(posedge clk) rdata[r] <= mem[raddr[r]];
    end else begin : g_async
      assign rdata[r] = mem[raddr[r]];
    end
  end
endmodule
