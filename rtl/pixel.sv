// pixel: digital part of one neural sensing and processing pixel.
//
// The DTDM controller turns the comparator outputs of the pixel's analog
// quantizer into ON/OFF events, and the in-pixel spike detector filters those
// events into spike detections that are sent to the AER arbiter with a
// req/ack handshake. The amplifier and comparators are analog and stay outside
// (cmp_hi, cmp_lo in; amp_rst, thr_fine out). The pairing of the two blocks
// follows the pixel structure of the paper; raw events are also brought out
// so that the event rate before and after detection can be observed.
module pixel
  import bmi_pkg::*;
#(
  parameter int unsigned WIN_CYCLES = DTDM_WIN_CYC,
  parameter int unsigned NCELL      = N_CELLS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       slot_tick,
  input  logic       cmp_hi,
  input  logic       cmp_lo,
  output logic       amp_rst,
  output logic       thr_fine,
  input  logic [$clog2(2*NCELL+1)-1:0] spd_thr,
  input  logic [3:0] spd_refr,
  output logic       on_ev,
  output logic       off_ev,
  output logic       spike,
  output logic       req,
  input  logic       ack
);
  logic [$clog2(2*NCELL+1)-1:0] sum_unused;

  dtdm_ctrl #(.WIN_CYCLES(WIN_CYCLES)) u_dtdm (
    .clk, .rst_n, .cmp_hi, .cmp_lo,
    .spikep(on_ev), .spiken(off_ev), .amp_rst, .thr_fine
  );

  imc_spd #(.NCELL(NCELL)) u_spd (
    .clk, .rst_n, .slot_tick, .on_ev, .off_ev,
    .thr(spd_thr), .refr(spd_refr), .req, .ack, .spike, .sum_out(sum_unused)
  );
endmodule
