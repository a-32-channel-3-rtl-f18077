// timebase: derives the two periodic strobes of the chip from the system clock.
//
// slot_tick pulses for one cycle every TS_CYC cycles; it ends one 125 us
// sampling slot of the in-pixel spike detectors. frame_tick pulses for one
// cycle every FRAME_CYC cycles; it closes one 4 ms (250 Hz) input frame of the
// decoder. The two counters are free running from reset. The periods are the
// paper's (125 us, 250 Hz); their expression in cycles of a 128 kHz clock and
// the counter implementation are this design's choice.
module timebase
  import bmi_pkg::*;
#(
  parameter int unsigned TS_CYCLES    = TS_CYC,
  parameter int unsigned FRAME_CYCLES = FRAME_CYC
) (
  input  logic clk,
  input  logic rst_n,
  output logic slot_tick,
  output logic frame_tick
);
  logic [$clog2(TS_CYCLES)-1:0]    slot_cnt;
  logic [$clog2(FRAME_CYCLES)-1:0] frame_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_cnt   <= '0;
      frame_cnt  <= '0;
      slot_tick  <= 1'b0;
      frame_tick <= 1'b0;
    end else begin
      slot_tick  <= (slot_cnt == ($bits(slot_cnt))'(TS_CYCLES - 1));
      frame_tick <= (frame_cnt == ($bits(frame_cnt))'(FRAME_CYCLES - 1));
      slot_cnt   <= (slot_cnt == ($bits(slot_cnt))'(TS_CYCLES - 1)) ? '0 : slot_cnt + 1'b1;
      frame_cnt  <= (frame_cnt == ($bits(frame_cnt))'(FRAME_CYCLES - 1)) ? '0 : frame_cnt + 1'b1;
    end
  end
endmodule
