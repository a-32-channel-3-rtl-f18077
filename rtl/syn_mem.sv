// syn_mem: synaptic weight memory of one SNN layer.
//
// ROWS x COLS signed 4-bit weights, one row per input axon and one column per
// neuron of the layer, so a single read returns the weights of one axon to
// every neuron at once. The read is synchronous (data one cycle after re),
// like an SRAM macro; the write port stores one weight per cycle and is used
// by the weight updater. The paper gives the 4-bit signed weights and one
// memory per layer; the row organisation and the one-cycle read latency are
// this design's choice. Contents are not reset: weights must be loaded first.
module syn_mem
  import bmi_pkg::*;
#(
  parameter int unsigned ROWS = L1_N,
  parameter int unsigned COLS = L1_N
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(ROWS)-1:0]   wrow,
  input  logic [$clog2(COLS)-1:0]   wcol,
  input  weight_t                   wdata,
  input  logic                      re,
  input  logic [$clog2(ROWS)-1:0]   rrow,
  output weight_t                   rdata [COLS]
);
  weight_t mem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (we) mem[wrow][wcol] <= wdata;
    if (re) rdata <= mem[rrow];
  end
endmodule
