// snn_layer: one fully connected layer of the Bi-SNN.
//
// N_IN input axons, N_OUT neurons working in parallel, a synapse controller
// and the layer's N_IN x N_OUT weight memory. With FIRE = 1 the neurons are
// bipolar LIF neurons and spk carries their ternary activations; with FIRE = 0
// they are leaky-integrate output neurons and only vmem is meaningful (spk is
// then all zero). done pulses when the time step is complete (spike valid of
// the layer; for the output layer, output valid). The weight write port is
// independent of en so weights can be loaded while the core is idle.
module snn_layer
  import bmi_pkg::*;
#(
  parameter int unsigned N_IN  = L1_N,
  parameter int unsigned N_OUT = L1_N,
  parameter bit          FIRE  = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     start,
  input  tern_t                    in_vec [N_IN],
  input  logic                     leak_en,
  input  logic [SHIFT_BITS-1:0]    shift,
  input  vmem_t                    vth,
  input  logic                     we,
  input  logic [$clog2(N_IN)-1:0]  wrow,
  input  logic [$clog2(N_OUT)-1:0] wcol,
  input  weight_t                  wdata,
  output tern_t                    spk  [N_OUT],
  output vmem_t                    vmem [N_OUT],
  output logic                     done,
  output logic                     busy
);
  logic                    mem_re, leak, w_valid, w_neg, act_valid;
  logic [$clog2(N_IN)-1:0] mem_rrow;
  weight_t                 wrow_data [N_OUT];

  synapse_ctrl #(.N_IN(N_IN)) u_ctrl (
    .clk, .rst_n, .en, .start, .in_vec, .leak_en,
    .mem_re, .mem_rrow, .leak, .w_valid, .w_neg, .act_valid, .done, .busy
  );

  syn_mem #(.ROWS(N_IN), .COLS(N_OUT)) u_mem (
    .clk, .we, .wrow, .wcol, .wdata, .re(mem_re), .rrow(mem_rrow), .rdata(wrow_data)
  );

  for (genvar j = 0; j < N_OUT; j++) begin : g_n
    if (FIRE) begin : g_bilif
      bilif_neuron u_n (
        .clk, .rst_n, .en, .leak, .shift, .w_valid, .w_neg, .weight(wrow_data[j]),
        .act_valid, .vth, .vmem(vmem[j]), .spk(spk[j])
      );
    end else begin : g_li
      li_neuron u_n (
        .clk, .rst_n, .en, .leak, .shift, .w_valid, .w_neg, .weight(wrow_data[j]),
        .vmem(vmem[j])
      );
      assign spk[j] = '0;
    end
  end
endmodule
