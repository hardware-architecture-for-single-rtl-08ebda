// cmem: matrix/vector register of the reconstruction datapath.
//
// Holds one of A_CS, A_CS*, A_P, X_P or X_TP as DEPTH complex words in the
// matrix format (40-bit parts, 24 fractional bits), row-major with a row
// stride chosen by the block that writes it. One synchronous write port and
// NRD combinational read ports, so a producer and up to NRD consumers can
// use it without arbitration (on an FPGA: distributed RAM, or block RAM with
// one added read cycle). Contents are not reset. The source names these
// registers but gives no organisation; the port structure is this design's.
module cmem
  import sira_pkg::*;
#(
  parameter int DEPTH = 4096,
  parameter int NRD   = 2
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  mat_t                     wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr [NRD],
  output mat_t                     rdata [NRD]
);
  mat_t mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign rdata[p] = mem[raddr[p]];
  end
endmodule
