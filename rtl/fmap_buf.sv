// fmap_buf: feature-map buffer with one write port and NRD read ports.
//
// Holds one feature map of DEPTH words of DW bits, word c*H*W + y*W + x for
// channel c, row y, column x. The write port is synchronous; each of the NRD
// read ports is synchronous too: rdata[p] is the word at raddr[p] of the
// previous clock. With NRD = 9 it delivers a whole 3x3 window of one channel
// per clock to the MAC unit. The paper does not describe buffering; this
// multi-ported register-file organisation is this design's choice. Contents
// are not reset; every word is written before it is read.
module fmap_buf #(
  parameter int unsigned DW     = qnn_pkg::BA_DEF,
  parameter int unsigned DEPTH  = 64 * 32 * 32,
  parameter int unsigned NRD    = 1,
  parameter int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [ADDR_W-1:0]            waddr,
  input  logic [DW-1:0]                wdata,
  input  logic [NRD-1:0][ADDR_W-1:0]   raddr,
  output logic [NRD-1:0][DW-1:0]       rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int p = 0; p < NRD; p++) rdata[p] <= mem[raddr[p]];
  end
endmodule
