// mode_ctrl: idle / inference mode control and clock gating of the SNN core.
//
// In idle mode the core's clock enable (core_en) is low and hi_supply asks the
// power management for the low supply; the AER decoder and frame buffer keep
// running and keep buffering frames. When a frame becomes valid and inference
// is enabled (infer_en), the controller raises hi_supply and core_en, waits
// SETTLE_CYCLES cycles for the supply, pulses core_start and stays in inference
// mode until the core reports out_valid, then returns to idle. A frame that
// arrives while an inference is still running is not decoded and counted in
// frames_dropped. With infer_en low the core never leaves idle mode.
//
// From the paper: the two modes, the low supply and reduced switching in idle
// mode, the clock gating block, and a mode signal shown next to the frame-valid and
// output-valid strobes. This design's choices: the settle time,
// core_en as the enable of the core's clock gate (an integrated clock-gating
// cell would replace it in a netlist) and the dropped-frame counter.
module mode_ctrl #(
  parameter int unsigned SETTLE_CYCLES = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       infer_en,
  input  logic       frame_valid,
  input  logic       core_done,
  output logic       hi_supply,
  output logic       core_en,
  output logic       core_start,
  output logic [7:0] frames_dropped
);
  typedef enum logic [1:0] {M_IDLE, M_WAKE, M_START, M_RUN} mode_e;
  mode_e state;
  logic [$clog2(SETTLE_CYCLES+1)-1:0] settle;

  assign hi_supply  = (state != M_IDLE);
  assign core_en    = (state != M_IDLE);
  assign core_start = (state == M_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= M_IDLE;
      settle         <= '0;
      frames_dropped <= '0;
    end else begin
      if (frame_valid && state != M_IDLE && frames_dropped != 8'hFF)
        frames_dropped <= frames_dropped + 1'b1;
      unique case (state)
        M_IDLE: if (frame_valid && infer_en) begin
          state  <= M_WAKE;
          settle <= ($bits(settle))'(SETTLE_CYCLES - 1);
        end
        M_WAKE: if (settle == '0) state <= M_START;
                else              settle <= settle - 1'b1;
        M_START: state <= M_RUN;
        M_RUN:   if (core_done) state <= M_IDLE;
        default: state <= M_IDLE;
      endcase
    end
  end
endmodule
