// weight_mem: INT8 weight memory of one spiking layer.
//
// The detector keeps every model parameter in on-chip SRAM and reads each
// one from it.  Here one memory word holds a full weight column: the NOUT
// signed INT8 weights W[0..NOUT-1][col] that one input neuron feeds.  A layer
// whose input neuron spiked reads that word and adds it to all its outputs at
// once, so a read costs one cycle per input spike.
//
// Write port: one weight (row = output index, col = input index) per cycle,
// used to load the trained parameters.  Read port: synchronous, the column
// addressed in cycle c appears on rdata in cycle c+1 (registered output,
// like an SRAM macro).  The memory is a plain array; a real chip would map
// it onto SRAM macros.  The word organization is this design's choice.
module weight_mem #(
  parameter int DEPTH = 256,   // input neurons (columns)
  parameter int NOUT  = 256,   // output neurons (weights per column)
  parameter int WW    = snn_pkg::WW
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2(NOUT)-1:0]       wrow,
  input  logic [$clog2(DEPTH)-1:0]      wcol,
  input  logic signed [WW-1:0]          wdata,
  input  logic                          re,
  input  logic [$clog2(DEPTH)-1:0]      raddr,
  output logic [NOUT-1:0][WW-1:0]       rdata
);
  logic [NOUT-1:0][WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wcol][wrow] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
