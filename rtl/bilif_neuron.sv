// bilif_neuron: bipolar leaky integrate-and-fire neuron.
//
// The membrane potential v is a 16-bit signed register with three update
// strobes from the layer's synapse controller, at most one per cycle:
//   leak      v <= v - (v >>> shift)            bit-shift leakage path
//   w_valid   v <= sat(v + weight) or sat(v - weight) when w_neg is set
//             (weight accumulate and overflow check: the sum saturates)
//   act_valid bipolar firing: v >= vth gives a positive spike, v <= -vth a
//             negative spike, and either resets v to 0; otherwise no spike.
// The ternary activation spk is registered on act_valid and held until the
// next act_valid. en is the clock enable of the gated core clock.
//
// From the paper: the blocks (weight accumulate, overflow check, right shift
// by L bits with a subtractor, membrane register, bipolar firing at >= Vth and
// <= -Vth, reset logic), the 16-bit membrane and the 4-bit weights. This
// design's choices: saturation as the overflow handling, reset to zero, and
// the order leak -> accumulate -> fire within one time step.
module bilif_neuron
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
  input  logic                  act_valid,
  input  vmem_t                 vth,
  output vmem_t                 vmem,
  output tern_t                 spk
);
  logic signed [VMEM_BITS+1:0] acc;

  always_comb begin
    if (w_neg) acc = $signed({{2{vmem[VMEM_BITS-1]}}, vmem}) - $signed({{(VMEM_BITS+2-W_BITS){weight[W_BITS-1]}}, weight});
    else       acc = $signed({{2{vmem[VMEM_BITS-1]}}, vmem}) + $signed({{(VMEM_BITS+2-W_BITS){weight[W_BITS-1]}}, weight});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem <= '0;
      spk  <= '0;
    end else if (en) begin
      if (leak) begin
        vmem <= vmem - (vmem >>> shift);
      end else if (w_valid) begin
        vmem <= sat_vmem(acc);
      end else if (act_valid) begin
        if (vmem >= vth) begin
          spk  <= '{pos: 1'b1, neg: 1'b0};
          vmem <= '0;
        end else if (vmem <= -vth) begin
          spk  <= '{pos: 1'b0, neg: 1'b1};
          vmem <= '0;
        end else begin
          spk  <= '0;
        end
      end
    end
  end
endmodule
