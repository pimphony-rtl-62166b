// gpr: General-Purpose Register file of the PIM HUB.
//
// Holds the inputs, outputs and intermediate results that move between the
// host, the channels (WR-INP reads it, RD-OUT writes it) and the EPU. The
// paper gives its capacity, 512 KB; this design stores it as ENTRIES words of
// one 32-byte tile each. Two read ports (A: WR-INP data and EPU operands,
// B: host read-back) are combinational; the single write port is clocked.
// The port count and the combinational reads are this design's own choice.
module gpr
  import pim_pkg::*;
#(
  parameter int ENTRIES = GPR_ENTRIES,
  localparam int AW = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  tile_t         wdata,
  input  logic [AW-1:0] raddr_a,
  output tile_t         rdata_a,
  input  logic [AW-1:0] raddr_b,
  output tile_t         rdata_b
);
  tile_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule
