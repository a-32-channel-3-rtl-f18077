// dtdm_ctrl: digital state machine of the dual-threshold delta modulator.
//
// The analog part of the quantizer (switched-capacitor delta stage and two
// comparators, not in this RTL) reports that the change of the amplifier output
// has crossed the upper boundary (cmp_hi) or the lower boundary (cmp_lo) of the
// window selected by thr_fine. On a crossing this controller emits a one-cycle
// event, spikep for an upward and spiken for a downward crossing, pulses
// amp_rst for RST_CYCLES cycles so the delta stage starts again from the new
// level, and switches to the fine window (thr_fine = 1). If no further crossing
// arrives within WIN_CYCLES cycles (1.5 ms) it falls back to the coarse window.
//
// From the paper: the coarse/fine window behaviour, the event names, the
// amplifier reset after each event and the 1.5 ms temporal window. This
// design's choices: the reset length, that comparators are ignored while the
// reset is applied, that an upward crossing wins if both are reported, and that
// every event restarts the 1.5 ms window.
// Timing: comparator inputs are sampled on the clock; the event, amp_rst and
// thr_fine change one cycle after the crossing is sampled.
module dtdm_ctrl
  import bmi_pkg::*;
#(
  parameter int unsigned WIN_CYCLES = DTDM_WIN_CYC,
  parameter int unsigned RST_CYCLES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic cmp_hi,     // delta above V_H of the active window
  input  logic cmp_lo,     // delta below V_L of the active window
  output logic spikep,     // ON event (one cycle)
  output logic spiken,     // OFF event (one cycle)
  output logic amp_rst,    // reset of the delta stage
  output logic thr_fine    // 1: fine window V_th2, 0: coarse window V_th1
);
  typedef enum logic {S_TRACK, S_RESET} state_e;
  state_e state;
  logic [$clog2(WIN_CYCLES+1)-1:0] win_cnt;
  logic [$clog2(RST_CYCLES+1)-1:0] rst_cnt;
  logic crossing;

  assign crossing = (state == S_TRACK) && (cmp_hi || cmp_lo);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_TRACK;
      win_cnt  <= '0;
      rst_cnt  <= '0;
      spikep   <= 1'b0;
      spiken   <= 1'b0;
      amp_rst  <= 1'b0;
      thr_fine <= 1'b0;
    end else begin
      spikep <= crossing &&  cmp_hi;
      spiken <= crossing && !cmp_hi;
      if (crossing) begin
        state    <= S_RESET;
        rst_cnt  <= ($bits(rst_cnt))'(RST_CYCLES - 1);
        amp_rst  <= 1'b1;
        thr_fine <= 1'b1;
        win_cnt  <= ($bits(win_cnt))'(WIN_CYCLES - 1);
      end else begin
        if (win_cnt != '0) win_cnt <= win_cnt - 1'b1;
        else               thr_fine <= 1'b0;
        if (state == S_RESET) begin
          if (rst_cnt == '0) begin
            state   <= S_TRACK;
            amp_rst <= 1'b0;
          end else begin
            rst_cnt <= rst_cnt - 1'b1;
          end
        end
      end
    end
  end

  // An event is never ON and OFF at once.
  a_one_polarity: assert property (@(posedge clk) disable iff (!rst_n) !(spikep && spiken));
endmodule
