// li_neuron: leaky integrate output neuron (no firing).
//
// Same membrane datapath as the bipolar LIF neuron: a leak strobe applies
// v <= v - (v >>> shift) and each weight strobe adds or subtracts a signed
// 4-bit weight with saturation to 16 bits. It never fires or resets; its
// membrane potential vmem is the decoded output (one velocity component) and is
// read after the layer's last weight has been accumulated. The paper names the
// output layer as leaky-integrate neurons whose Vmem[15:0] leaves the core;
// sharing the leak and saturation with the hidden layers is this design's
// choice.
module li_neuron
  import bmi_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  leak,
  input  logic [SHIFT_BITS-1:0] shift,
  input  logic                  w_valid,
  input  logic                  w_neg,
  input  weight_t               weight,
  output vmem_t                 vmem
);
  logic signed [VMEM_BITS+1:0] wext, acc;

  assign wext = $signed({{(VMEM_BITS+2-W_BITS){weight[W_BITS-1]}}, weight});
  assign acc  = w_neg ? $signed({{2{vmem[VMEM_BITS-1]}}, vmem}) - wext
                      : $signed({{2{vmem[VMEM_BITS-1]}}, vmem}) + wext;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          vmem <= '0;
    else if (en) begin
      if (leak)          vmem <= vmem - (vmem >>> shift);
      else if (w_valid)  vmem <= sat_vmem(acc);
    end
  end
endmodule
