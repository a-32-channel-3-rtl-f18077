// pixel_array: the 32-channel frontend, 4 rows of 8 pixels (P0..P31).
//
// Every pixel shares the slot strobe and the spike-detector configuration; each
// has its own comparator inputs, amplifier reset and window select towards its
// analog quantizer, and its own req/ack pair towards the AER arbiter. Pixel k
// sits at row k/8, column k%8 and drives req[k], as in the paper's array
// drawing.
module pixel_array
  import bmi_pkg::*;
#(
  parameter int unsigned NCH        = N_CH,
  parameter int unsigned WIN_CYCLES = DTDM_WIN_CYC
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           slot_tick,
  input  logic [NCH-1:0] cmp_hi,
  input  logic [NCH-1:0] cmp_lo,
  output logic [NCH-1:0] amp_rst,
  output logic [NCH-1:0] thr_fine,
  input  logic [4:0]     spd_thr,
  input  logic [3:0]     spd_refr,
  output logic [NCH-1:0] on_ev,
  output logic [NCH-1:0] off_ev,
  output logic [NCH-1:0] spike,
  output logic [NCH-1:0] req,
  input  logic [NCH-1:0] ack
);
  for (genvar k = 0; k < NCH; k++) begin : g_px
    pixel #(.WIN_CYCLES(WIN_CYCLES), .NCELL(N_CELLS)) u_px (
      .clk, .rst_n, .slot_tick,
      .cmp_hi(cmp_hi[k]), .cmp_lo(cmp_lo[k]),
      .amp_rst(amp_rst[k]), .thr_fine(thr_fine[k]),
      .spd_thr, .spd_refr,
      .on_ev(on_ev[k]), .off_ev(off_ev[k]), .spike(spike[k]),
      .req(req[k]), .ack(ack[k])
    );
  end
endmodule
