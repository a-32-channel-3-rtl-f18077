// aer_decoder_fb: AER decoder and 32-bit input frame buffer of the decoder.
//
// Each AER transfer (four-phase: aer_req up -> aer_ack up -> aer_req down ->
// aer_ack down) carries a 6-bit address; if its valid bit 5 is set, bit
// addr[4:0] of the frame being collected is set. At frame_tick (every 4 ms,
// 250 Hz) the collected pattern, including an event accepted in that same
// cycle, is copied to frame and frame_valid pulses for one cycle; collection
// restarts from zero. A channel that fires several times in one frame still
// gives a single 1, as the paper's binary firing pattern implies. This block
// is never clock gated, so it keeps acknowledging and buffering in idle mode.
// From the paper: the 32-bit frame, the 250 Hz rate and the frame-valid
// signal; the handshake and the bit-5 valid flag are this design's choice.
module aer_decoder_fb
  import bmi_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              aer_req,
  input  logic [AER_AW-1:0] aer_addr,
  output logic              aer_ack,
  input  logic              frame_tick,
  output logic [NCH-1:0]    frame,
  output logic              frame_valid
);
  logic [NCH-1:0] collect, hit;
  logic           accept;

  assign accept = aer_req && !aer_ack;
  always_comb begin
    hit = '0;
    if (accept && aer_addr[AER_AW-1]) hit[aer_addr[$clog2(NCH)-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aer_ack     <= 1'b0;
      collect     <= '0;
      frame       <= '0;
      frame_valid <= 1'b0;
    end else begin
      if (accept)                 aer_ack <= 1'b1;
      else if (!aer_req)          aer_ack <= 1'b0;
      frame_valid <= frame_tick;
      if (frame_tick) begin
        frame   <= collect | hit;
        collect <= '0;
      end else begin
        collect <= collect | hit;
      end
    end
  end
endmodule
