// imc_spd: in-pixel event-based spike detector with its pixel handshake.
//
// Each pixel keeps a 1 ms sliding history of its DTDM events in 8 ON and 8 OFF
// bitcells, one bit per 125 us slot. During a slot the events of each polarity
// are collected in a capture bit (the eDRAM capacitor of the current cell, which
// was cleared when the slot began). At slot_tick the capture bit is latched
// into the cell that the round-robin pointer selects, the capture bits are
// cleared for the next slot and the pointer advances. Then the global read
// phase runs: for n = 0..7 one cell of each polarity is read per cycle and a
// cell holding 1 adds one to the ON or OFF ripple counter (the pulses of the
// precharged detection line). One cycle later the sum of both counters is
// compared with the detection threshold: sum >= thr is a spike, unless the
// refractory counter is still running. A spike raises req towards the AER
// arbiter; req is held until ack rises, and a new req waits until ack has
// fallen again (four-phase handshake).
//
// From the paper: 8 cells per polarity, T_s = 125 us, 1 ms window, round-robin
// pointer, latch at the end of each slot, serial read of cells 0..7 into ON and
// OFF counters, sum compared with a configurable threshold, refractory and
// pixel handshake blocks. This design's choices: synchronous counters in place
// of ripple counters, one read cycle per cell, the comparison direction
// (>=), the refractory rule (after a spike the next refr slot reads cannot
// fire) and dropping a detection that arrives while a request is pending.
// Timing: the read phase takes N_CELLS cycles after slot_tick and the compare
// one more, so slot_tick must be at least N_CELLS+2 cycles apart.
module imc_spd
  import bmi_pkg::*;
#(
  parameter int unsigned NCELL = N_CELLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      slot_tick,
  input  logic                      on_ev,
  input  logic                      off_ev,
  input  logic [$clog2(2*NCELL+1)-1:0] thr,
  input  logic [3:0]                refr,
  output logic                      req,
  input  logic                      ack,
  output logic                      spike,      // one-cycle detection strobe
  output logic [$clog2(2*NCELL+1)-1:0] sum_out  // last popcount, for observation
);
  localparam int unsigned CW = $clog2(NCELL+1);
  localparam int unsigned SW = $clog2(2*NCELL+1);
  localparam int unsigned PW = $clog2(NCELL);

  logic             cap_on, cap_off;          // eDRAM capture of the current slot
  logic [NCELL-1:0] cell_on, cell_off;        // latched bitcells
  logic [PW-1:0]    ptr;                      // round-robin cell pointer
  logic             reading, cmp_pend;
  logic [PW-1:0]    rd_n;
  logic [CW-1:0]    cnt_on, cnt_off;          // ON / OFF counters
  logic [3:0]       refr_cnt;
  logic [SW-1:0]    sum;

  assign sum = SW'(cnt_on) + SW'(cnt_off);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_on   <= 1'b0;
      cap_off  <= 1'b0;
      cell_on  <= '0;
      cell_off <= '0;
      ptr      <= '0;
      reading  <= 1'b0;
      cmp_pend <= 1'b0;
      rd_n     <= '0;
      cnt_on   <= '0;
      cnt_off  <= '0;
      refr_cnt <= '0;
      req      <= 1'b0;
      spike    <= 1'b0;
      sum_out  <= '0;
    end else begin
      spike <= 1'b0;
      if (slot_tick) begin
        // end of slot: latch and hold, clear the capture for the next slot
        cell_on[ptr]  <= cap_on  | on_ev;
        cell_off[ptr] <= cap_off | off_ev;
        cap_on   <= 1'b0;
        cap_off  <= 1'b0;
        ptr      <= (ptr == PW'(NCELL-1)) ? '0 : ptr + 1'b1;
        reading  <= 1'b1;
        rd_n     <= '0;
        cnt_on   <= '0;
        cnt_off  <= '0;
      end else begin
        if (on_ev)  cap_on  <= 1'b1;
        if (off_ev) cap_off <= 1'b1;
      end

      // global read phase: one detection-line pulse per cell holding 1
      if (reading && !slot_tick) begin
        if (cell_on[rd_n])  cnt_on  <= cnt_on + 1'b1;
        if (cell_off[rd_n]) cnt_off <= cnt_off + 1'b1;
        if (rd_n == PW'(NCELL-1)) begin
          reading  <= 1'b0;
          cmp_pend <= 1'b1;
        end else begin
          rd_n <= rd_n + 1'b1;
        end
      end

      // compare and refractory
      if (cmp_pend) begin
        cmp_pend <= 1'b0;
        sum_out  <= sum;
        if (refr_cnt != '0) begin
          refr_cnt <= refr_cnt - 1'b1;
        end else if (sum >= thr) begin
          spike    <= 1'b1;
          refr_cnt <= refr;
          if (!req && !ack) req <= 1'b1;
        end
      end

      // pixel handshake: drop the request once it is acknowledged
      if (req && ack) req <= 1'b0;
    end
  end

  // The read and compare phases must be over before the next slot ends.
  a_slot_spacing: assert property (@(posedge clk) disable iff (!rst_n)
                                   slot_tick |-> !reading && !cmp_pend);
endmodule
