// snn_core: the 32-48-2 bipolar spiking neural network decoder core.
//
// Layer 1 has 32 bipolar LIF neurons fed by the 32-bit input frame (a set bit
// is a +1 input), layer 2 has 48 bipolar LIF neurons fed by the ternary
// activations of layer 1, and layer 3 has 2 leaky-integrate neurons fed by
// layer 2 whose 16-bit membrane potentials are the decoded X and Y velocity.
// A start strobe (frame valid) runs layer 1; each layer's done strobe starts
// the next one (L1 spike valid -> L2, L2 spike valid -> L3), and layer 3's
// done is out_valid. One weight write port reaches the three memories,
// selected by wlayer.
//
// From the paper: the 32-48-2 structure, bipolar LIF hidden layers, leaky
// integrate output layer, 4-bit weights, Vmem[15:0] outputs and the chain of
// valid strobes. Full connectivity between layers follows the block diagram.
// Latency: 2*A + 4 cycles per layer for A active inputs, so at most
// 68 + 68 + 100 = 236 cycles per frame.
module snn_core
  import bmi_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  start,
  input  logic [L1_N-1:0]       frame,
  input  cfg_t                  cfg,
  input  logic                  we,
  input  layer_e                wlayer,
  input  logic [5:0]            wrow,
  input  logic [5:0]            wcol,
  input  weight_t               wdata,
  output vmem_t                 vel [L3_N],
  output logic                  out_valid,
  output logic                  busy
);
  tern_t in1 [L1_N];
  tern_t s1  [L1_N];
  tern_t s2  [L2_N];
  tern_t s3  [L3_N];
  vmem_t v1  [L1_N];
  vmem_t v2  [L2_N];
  logic  d1, d2, b1, b2, b3;

  for (genvar i = 0; i < L1_N; i++) begin : g_in
    assign in1[i] = '{pos: frame[i], neg: 1'b0};
  end

  snn_layer #(.N_IN(L1_N), .N_OUT(L1_N), .FIRE(1'b1)) u_l1 (
    .clk, .rst_n, .en, .start, .in_vec(in1), .leak_en(cfg.leak_en), .shift(cfg.shift_l1),
    .vth(cfg.vth_l1), .we(we && wlayer == LAYER_L1), .wrow(wrow[$clog2(L1_N)-1:0]),
    .wcol(wcol[$clog2(L1_N)-1:0]), .wdata, .spk(s1), .vmem(v1), .done(d1), .busy(b1)
  );

  snn_layer #(.N_IN(L1_N), .N_OUT(L2_N), .FIRE(1'b1)) u_l2 (
    .clk, .rst_n, .en, .start(d1), .in_vec(s1), .leak_en(cfg.leak_en), .shift(cfg.shift_l2),
    .vth(cfg.vth_l2), .we(we && wlayer == LAYER_L2), .wrow(wrow[$clog2(L1_N)-1:0]),
    .wcol(wcol[$clog2(L2_N)-1:0]), .wdata, .spk(s2), .vmem(v2), .done(d2), .busy(b2)
  );

  snn_layer #(.N_IN(L2_N), .N_OUT(L3_N), .FIRE(1'b0)) u_l3 (
    .clk, .rst_n, .en, .start(d2), .in_vec(s2), .leak_en(cfg.leak_en), .shift(cfg.shift_l3),
    .vth('0), .we(we && wlayer == LAYER_L3), .wrow(wrow[$clog2(L2_N)-1:0]),
    .wcol(wcol[$clog2(L3_N)-1:0]), .wdata, .spk(s3), .vmem(vel), .done(out_valid), .busy(b3)
  );

  assign busy = b1 | b2 | b3;
endmodule
