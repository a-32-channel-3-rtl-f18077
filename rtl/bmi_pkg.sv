// bmi_pkg: types and constants shared by the frontend, the AER link and the
// spiking-neural-network decoder.
//
// The paper fixes the channel count (32, as a 4x8 pixel array), the number of
// event bitcells per polarity (8), the 32-48-2 network, the 4-bit signed
// synaptic weights and the 16-bit output membrane potential (Vmem[15:0]).
// The system clock (128 kHz) and every derived cycle count are this design's
// choice: the paper gives only the times (125 us slot, 1.5 ms DTDM window,
// 250 Hz frames), and 128 kHz turns each of them into a whole number of cycles.
package bmi_pkg;

  // ---------------- array and timing ----------------
  localparam int unsigned N_CH        = 32;    // channels (4x8 pixels)
  localparam int unsigned N_CELLS     = 8;     // ON and OFF bitcells per pixel
  localparam int unsigned CLK_HZ      = 128_000;
  localparam int unsigned TS_CYC      = CLK_HZ / 8000;        // 125 us  -> 16
  localparam int unsigned DTDM_WIN_CYC= CLK_HZ * 3 / 2000;    // 1.5 ms  -> 192
  localparam int unsigned FRAME_CYC   = CLK_HZ / 250;         // 4 ms    -> 512

  // ---------------- AER ----------------
  localparam int unsigned AER_AW      = 6;     // ADDR[5:0] in the block diagram

  // ---------------- SNN ----------------
  localparam int unsigned L1_N        = 32;
  localparam int unsigned L2_N        = 48;
  localparam int unsigned L3_N        = 2;
  localparam int unsigned W_BITS      = 4;     // signed synaptic weight
  localparam int unsigned VMEM_BITS   = 16;    // membrane potential
  localparam int unsigned SHIFT_BITS  = 4;     // leak shift amount L (0..15)

  typedef logic signed [W_BITS-1:0]    weight_t;
  typedef logic signed [VMEM_BITS-1:0] vmem_t;

  // Ternary activation of a bipolar neuron: +1 (pos), -1 (neg) or 0.
  typedef struct packed {
    logic pos;
    logic neg;
  } tern_t;

  // Target memory of a weight write.
  typedef enum logic [1:0] {
    LAYER_L1 = 2'd0,
    LAYER_L2 = 2'd1,
    LAYER_L3 = 2'd2
  } layer_e;

  // Run-time configuration of the decoder and the spike detectors.
  typedef struct packed {
    vmem_t                 vth_l1;     // firing threshold of layer 1
    vmem_t                 vth_l2;     // firing threshold of layer 2
    logic [SHIFT_BITS-1:0] shift_l1;   // leak shift L of layer 1
    logic [SHIFT_BITS-1:0] shift_l2;
    logic [SHIFT_BITS-1:0] shift_l3;
    logic                  leak_en;    // leak enable for all layers
    logic                  infer_en;   // 1: inference mode allowed, 0: idle only
    logic [4:0]            spd_thr;    // IMC-SPD detection threshold (0..16)
    logic [3:0]            spd_refr;   // IMC-SPD refractory length in slots
  } cfg_t;

  localparam cfg_t CFG_DEFAULT = '{
    vth_l1:   16'sd8,
    vth_l2:   16'sd8,
    shift_l1: 4'd3,
    shift_l2: 4'd3,
    shift_l3: 4'd3,
    leak_en:  1'b1,
    infer_en: 1'b1,
    spd_thr:  5'd5,
    spd_refr: 4'd8
  };

  // Saturate a wider signed value to the membrane width (overflow check).
  function automatic vmem_t sat_vmem(input logic signed [VMEM_BITS+1:0] v);
    localparam logic signed [VMEM_BITS+1:0] VMAX = (1 <<< (VMEM_BITS-1)) - 1;
    localparam logic signed [VMEM_BITS+1:0] VMIN = -(1 <<< (VMEM_BITS-1));
    if (v > VMAX)      return vmem_t'(VMAX);
    else if (v < VMIN) return vmem_t'(VMIN);
    else               return vmem_t'(v);
  endfunction

endpackage
