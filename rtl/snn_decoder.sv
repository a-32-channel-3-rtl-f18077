// snn_decoder: the bipolar SNN motor-intention decoder subsystem.
//
// AER transfers from the arbiter are collected by the AER decoder into a
// 32-bit firing pattern per 4 ms frame. At each frame_valid the mode
// controller wakes the core (high supply, clock enabled), starts one time step
// of the 32-48-2 Bi-SNN on that frame and puts the core back into idle mode
// once the two output membrane potentials are ready; the output buffer holds
// them for readout. The configuration registers also supply the threshold and
// refractory setting of the in-pixel spike detectors, and the weight updater
// loads the three synaptic memories. The grouping follows the paper's decoder
// block diagram; routing the detector settings through this register file is
// this design's choice.
module snn_decoder
  import bmi_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // AER link from the arbiter
  input  logic              aer_req,
  input  logic [AER_AW-1:0] aer_addr,
  output logic              aer_ack,
  input  logic              frame_tick,
  // configuration interface
  input  logic              cfg_we,
  input  logic [1:0]        cfg_addr,
  input  logic [15:0]       cfg_wdata,
  output logic [15:0]       cfg_rdata,
  output logic [4:0]        spd_thr,
  output logic [3:0]        spd_refr,
  // weight updater
  input  logic              wu_set,
  input  layer_e            wu_layer,
  input  logic [5:0]        wu_row,
  input  logic [5:0]        wu_col,
  input  logic              wu_valid,
  input  weight_t           wu_data,
  // outputs
  input  logic              vel_rd,
  output vmem_t             vel [L3_N],
  output logic              vel_ready,
  output logic              vel_overrun,
  output logic              hi_supply,
  output logic [7:0]        frames_dropped,
  output logic [N_CH-1:0]   frame_q,
  output logic              frame_valid
);
  cfg_t       cfg;
  logic       core_en, core_start, out_valid, core_busy;
  logic       we;
  layer_e     wlayer;
  logic [5:0] wrow, wcol;
  weight_t    wdata;
  vmem_t      vel_core [L3_N];

  aer_decoder_fb u_aer (
    .clk, .rst_n, .aer_req, .aer_addr, .aer_ack, .frame_tick,
    .frame(frame_q), .frame_valid
  );

  snn_config u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .cfg
  );

  weight_updater u_wu (
    .clk, .rst_n, .wu_set, .wu_layer, .wu_row, .wu_col, .wu_valid, .wu_data,
    .we, .wlayer, .wrow, .wcol, .wdata
  );

  mode_ctrl u_mode (
    .clk, .rst_n, .infer_en(cfg.infer_en), .frame_valid, .core_done(out_valid),
    .hi_supply, .core_en, .core_start, .frames_dropped
  );

  snn_core u_core (
    .clk, .rst_n, .en(core_en), .start(core_start), .frame(frame_q), .cfg,
    .we, .wlayer, .wrow, .wcol, .wdata, .vel(vel_core), .out_valid, .busy(core_busy)
  );

  output_buffer u_ob (
    .clk, .rst_n, .out_valid, .vel(vel_core), .rd(vel_rd),
    .vel_q(vel), .vel_ready, .overrun(vel_overrun)
  );

  assign spd_thr  = cfg.spd_thr;
  assign spd_refr = cfg.spd_refr;

  // the core only works while its clock is enabled
  a_busy_en: assert property (@(posedge clk) disable iff (!rst_n) core_busy |-> core_en);
endmodule
