// tb_imc_spd: random ON/OFF event trains into one spike detector. A reference
// model keeps the last 8 slots of each polarity, computes the popcount sum at
// every slot end and applies the threshold and refractory rule; the testbench
// compares the detector's sum, its spike strobe (exactly 10 cycles after the
// slot strobe) and the number of req/ack handshakes with the model. It also
// acts as the AER arbiter, acknowledging requests after a random delay.
module tb_imc_spd;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0;
  logic slot_tick = 0, on_ev = 0, off_ev = 0, ack = 0;
  logic [4:0] thr = 5'd5;
  logic [3:0] refr = 4'd3;
  logic req, spike;
  logic [4:0] sum_out;
  int checks = 0, failures = 0;

  imc_spd dut (.clk, .rst_n, .slot_tick, .on_ev, .off_ev, .thr, .refr, .req, .ack, .spike, .sum_out);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  // model state
  bit hist_on [8], hist_off [8];
  bit cur_on, cur_off;
  int slot = 0, m_refr = 0, exp_spikes = 0, got_spikes = 0, handshakes = 0, reqs_rise = 0;
  int cyc = 0, tick_cyc = -100;
  bit prev_req = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (spike) begin
      got_spikes++;
      check(cyc - tick_cyc == 10, $sformatf("spike latency %0d", cyc - tick_cyc));
    end
    if (req && !prev_req) reqs_rise++;
    prev_req = req;
  end

  // arbiter side of the pixel handshake
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && req) begin
        repeat ($urandom_range(0, 3)) @(posedge clk);
        ack <= 1;
        while (req) @(posedge clk);
        repeat ($urandom_range(0, 2)) @(posedge clk);
        ack <= 0;
        handshakes++;
      end
    end
  end

  task automatic run_slots(input int n, input int rate);
    int s, m_sum, ex;
    for (int k = 0; k < n; k++) begin
      cur_on = 0; cur_off = 0;
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        on_ev     = ($urandom_range(0, 99) < rate);
        off_ev    = ($urandom_range(0, 99) < rate);
        slot_tick = (c == 15);
        if (on_ev)  cur_on  = 1;
        if (off_ev) cur_off = 1;
        if (slot_tick) tick_cyc = cyc + 1;
      end
      @(negedge clk);
      on_ev = 0; off_ev = 0; slot_tick = 0;
      hist_on[slot % 8]  = cur_on;
      hist_off[slot % 8] = cur_off;
      slot++;
      m_sum = 0;
      for (int i = 0; i < 8; i++) m_sum += int'(hist_on[i]) + int'(hist_off[i]);
      ex = 0;
      if (m_refr != 0) m_refr--;
      else if (m_sum >= int'(thr)) begin ex = 1; m_refr = int'(refr); end
      exp_spikes += ex;
      // the compare happens 10 cycles after the tick; sample after it
      repeat (10) @(negedge clk);
      check(sum_out == 5'(m_sum), $sformatf("slot %0d sum %0d expected %0d", slot, sum_out, m_sum));
      check(got_spikes == exp_spikes, $sformatf("slot %0d spikes %0d expected %0d", slot, got_spikes, exp_spikes));
      // finish the slot: 16 cycles per slot in total
      repeat (16 - 11 - 1) @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_slots(20, 2);     // sparse noise
    run_slots(40, 25);    // burst
    run_slots(20, 6);
    thr = 5'd9; refr = 4'd0;
    run_slots(40, 12);
    thr = 5'd0;
    run_slots(10, 0);
    repeat (20) @(negedge clk);
    check(exp_spikes > 10, $sformatf("enough detections exercised (%0d)", exp_spikes));
    check(reqs_rise == exp_spikes, $sformatf("requests %0d expected %0d", reqs_rise, exp_spikes));
    check(handshakes == exp_spikes, $sformatf("handshakes %0d expected %0d", handshakes, exp_spikes));
    check(!req, "no request left pending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
