// bmi_soc: 32-channel event-based brain-machine interface, digital top level.
//
// Signal path: each of the 32 pixels receives the comparator outputs of its
// analog dual-threshold delta modulator (cmp_hi/cmp_lo, from outside this RTL)
// and returns the amplifier reset and window select (amp_rst/thr_fine). The
// pixel's DTDM controller produces ON/OFF events, its in-memory spike detector
// turns them into spike detections, and detections travel over AER (arbiter ->
// decoder) into the 32-bit frame buffer. Every 4 ms the frame is decoded by the
// 32-48-2 Bi-SNN into two 16-bit velocity values. A timebase gives the 125 us
// detector slot and the 4 ms frame. Configuration and weight loading use two
// simple synchronous write ports; hi_supply is the mode output to the supply.
// The raw events (on_ev/off_ev) and detections (spike) of every pixel are
// brought out for observation. Block partition and connections follow the
// paper's SoC diagram; the single clock domain and all port protocols are this
// design's choice.
module bmi_soc
  import bmi_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // analog quantizer interface, one bit per channel
  input  logic [N_CH-1:0]   cmp_hi,
  input  logic [N_CH-1:0]   cmp_lo,
  output logic [N_CH-1:0]   amp_rst,
  output logic [N_CH-1:0]   thr_fine,
  // configuration interface
  input  logic              cfg_we,
  input  logic [1:0]        cfg_addr,
  input  logic [15:0]       cfg_wdata,
  output logic [15:0]       cfg_rdata,
  // weight updater
  input  logic              wu_set,
  input  layer_e            wu_layer,
  input  logic [5:0]        wu_row,
  input  logic [5:0]        wu_col,
  input  logic              wu_valid,
  input  weight_t           wu_data,
  // decoded velocities
  input  logic              vel_rd,
  output vmem_t             vel [L3_N],
  output logic              vel_ready,
  output logic              vel_overrun,
  output logic              hi_supply,
  output logic [7:0]        frames_dropped,
  // observation
  output logic [N_CH-1:0]   on_ev,
  output logic [N_CH-1:0]   off_ev,
  output logic [N_CH-1:0]   spike,
  output logic [N_CH-1:0]   frame_q,
  output logic              frame_valid
);
  logic              slot_tick, frame_tick;
  logic [N_CH-1:0]   px_req, px_ack;
  logic              aer_req, aer_ack;
  logic [AER_AW-1:0] aer_addr;
  logic [4:0]        spd_thr;
  logic [3:0]        spd_refr;

  timebase u_tb (.clk, .rst_n, .slot_tick, .frame_tick);

  pixel_array u_px (
    .clk, .rst_n, .slot_tick, .cmp_hi, .cmp_lo, .amp_rst, .thr_fine,
    .spd_thr, .spd_refr, .on_ev, .off_ev, .spike, .req(px_req), .ack(px_ack)
  );

  aer_arbiter u_arb (
    .clk, .rst_n, .req(px_req), .ack(px_ack), .aer_req, .aer_addr, .aer_ack
  );

  snn_decoder u_dec (
    .clk, .rst_n, .aer_req, .aer_addr, .aer_ack, .frame_tick,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .spd_thr, .spd_refr,
    .wu_set, .wu_layer, .wu_row, .wu_col, .wu_valid, .wu_data,
    .vel_rd, .vel, .vel_ready, .vel_overrun, .hi_supply, .frames_dropped,
    .frame_q, .frame_valid
  );
endmodule
