// weight_mem: on-chip store of one convolution layer's quantized weights.
//
// The paper keeps all network parameters on chip, already quantized to B_w-bit
// signed integers during training. This memory holds one 3x3 kernel per word:
// word oc*CIN + ic holds the 9 taps (tap k at bits [k*BW +: BW]) that connect
// input channel ic to output channel oc. One synchronous write port for
// loading and one synchronous read port: rdata is the word at raddr of the
// previous clock. The word layout and port timing are this design's choices.
// Contents are not reset (a RAM); they must be loaded before use.
module weight_mem #(
  parameter int unsigned BW     = qnn_pkg::BW_DEF,
  parameter int unsigned TAPS   = qnn_pkg::TAPS,
  parameter int unsigned DEPTH  = 64 * 64,
  parameter int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [ADDR_W-1:0]        waddr,
  input  logic [TAPS-1:0][BW-1:0]  wdata,
  input  logic [ADDR_W-1:0]        raddr,
  output logic [TAPS-1:0][BW-1:0]  rdata
);
  logic [TAPS-1:0][BW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
