// dtdm_analog_model: behavioural model of the analog half of one DTDM
// quantizer, for testbenches only (not synthesizable, not part of the chip
// RTL). The amplifier output is an integer vin; the switched-capacitor delta
// stage remembers vin while amp_rst is high (reference ref). The two
// comparators report vin - ref >= TH against the window chosen by thr_fine:
// TH_COARSE (V_th1) or TH_FINE (V_th2).
module dtdm_analog_model #(
  parameter int TH_COARSE = 40,
  parameter int TH_FINE   = 10
) (
  input  logic clk,
  input  int   vin,
  input  logic amp_rst,
  input  logic thr_fine,
  output logic cmp_hi,
  output logic cmp_lo
);
  int ref_v = 0;
  int th;

  always @(posedge clk) if (amp_rst) ref_v <= vin;

  always_comb begin
    th     = thr_fine ? TH_FINE : TH_COARSE;
    cmp_hi = (vin - ref_v) >= th;
    cmp_lo = (vin - ref_v) <= -th;
  end
endmodule
