// tb_spd_threshold_sweep: detection threshold sweep of the in-pixel spike
// detector over the full 32-channel frontend.
//
// The same synthetic recording is replayed through the 32 pixels (with a
// behavioural model of each analog quantizer, coarse threshold 40, fine 10)
// once for every detection threshold from 1 to 8, with the default refractory
// setting. The recording is made with a fixed linear congruential generator
// (x <- 1664525*x + 1013904223), restarted for every threshold, so each run
// sees identical input:
//   - background noise, uniform in [-4, 4];
//   - one-sample noise transients of +/-55, 5 per 10,000 samples per channel;
//   - biphasic action potentials (-300, then +200, then back to baseline,
//     140 samples long) at 30*(1 + k%5) per 100,000 samples on channel k,
//     except on every fourth channel (k%4 == 3), which carries noise only.
// For each run it reports the quantizer events, the spike detections and the
// event-rate reduction (events per detection).
//
// Checks:
//   - Every channel's detection count equals an independent model of the
//     detector. The model keeps 8+8 slot bits, adds up the ON and OFF bits
//     after each slot, and compares the sum with the threshold under the
//     refractory rule.
//   - Every detection is delivered as exactly one AER request.
//   - Detections never increase with the threshold.
//   - Noise-only channels give detections at threshold 1 but fewer at 5.
//   - The reduction at threshold 8 exceeds that at threshold 1.
// The slot strobe comes from the timebase (16 cycles = 125 us).
module tb_spd_threshold_sweep;
  import bmi_pkg::*;
  localparam int RUN_CYC = 60000;
  logic clk = 0, rst_n = 0;
  logic slot_tick, frame_tick;
  int   vin [N_CH];
  logic [N_CH-1:0] cmp_hi, cmp_lo, amp_rst, thr_fine, on_ev, off_ev, spike, req;
  logic [N_CH-1:0] ack = '0;
  logic [4:0] thr = 5'd1;
  int checks = 0, failures = 0;
  bit running = 0;

  timebase u_tb (.clk, .rst_n, .slot_tick, .frame_tick);
  for (genvar k = 0; k < N_CH; k++) begin : g_an
    dtdm_analog_model #(.TH_COARSE(40), .TH_FINE(10)) u_an (
      .clk, .vin(vin[k]), .amp_rst(amp_rst[k]), .thr_fine(thr_fine[k]),
      .cmp_hi(cmp_hi[k]), .cmp_lo(cmp_lo[k]));
  end
  pixel_array dut (.clk, .rst_n, .slot_tick, .cmp_hi, .cmp_lo, .amp_rst, .thr_fine,
                   .spd_thr(thr), .spd_refr(CFG_DEFAULT.spd_refr),
                   .on_ev, .off_ev, .spike, .req, .ack);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  // ---------------- stimulus ----------------
  int unsigned lcg;
  int ap_ph [N_CH];
  function automatic int unsigned rnd(input int unsigned m);
    lcg = lcg * 32'd1664525 + 32'd1013904223;
    return (lcg >> 8) % m;
  endfunction
  function automatic int ap_shape(input int i);
    if (i < 40)       return -300 * (i + 1) / 40;
    else if (i < 100) return -300 + 500 * (i - 39) / 60;
    else              return 200 - 200 * (i - 99) / 40;
  endfunction
  always @(negedge clk) if (running) begin
    for (int k = 0; k < N_CH; k++) begin
      int n, rate;
      rate = (k % 4 == 3) ? 0 : 30 * (1 + k % 5);
      if (ap_ph[k] < 0 && rnd(100000) < rate) ap_ph[k] = 0;
      n = int'(rnd(9)) - 4;
      if (rnd(10000) < 5) n = (rnd(2) != 0) ? 55 : -55;
      if (ap_ph[k] >= 0) begin
        vin[k] = n + ap_shape(ap_ph[k]);
        ap_ph[k]++;
        if (ap_ph[k] == 140) ap_ph[k] = -1;
      end else begin
        vin[k] = n;
      end
    end
  end

  // ---------------- AER side: acknowledge each request after one cycle ----------------
  int n_req [N_CH];
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < N_CH; k++) begin
      if (req[k] && !ack[k]) begin ack[k] <= 1'b1; n_req[k]++; end
      else if (!req[k] && ack[k]) ack[k] <= 1'b0;
    end
  end

  // ---------------- reference model of the detector and counters ----------------
  bit hist_on [N_CH][8], hist_off [N_CH][8];
  bit cur_on [N_CH], cur_off [N_CH];
  int ptr = 0;
  int m_refr [N_CH], m_det [N_CH], n_det [N_CH], n_ev [N_CH];
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < N_CH; k++) begin
      int s;
      if (spike[k]) n_det[k]++;
      n_ev[k] += int'(on_ev[k]) + int'(off_ev[k]);
      cur_on[k]  |= on_ev[k];
      cur_off[k] |= off_ev[k];
      if (slot_tick) begin
        hist_on[k][ptr]  = cur_on[k];
        hist_off[k][ptr] = cur_off[k];
        cur_on[k] = 0; cur_off[k] = 0;
        s = 0;
        for (int c = 0; c < 8; c++) s += int'(hist_on[k][c]) + int'(hist_off[k][c]);
        if (m_refr[k] > 0) m_refr[k]--;
        else if (s >= int'(thr)) begin m_det[k]++; m_refr[k] = int'(CFG_DEFAULT.spd_refr); end
      end
    end
    if (slot_tick) ptr = (ptr + 1) % 8;
  end

  // ---------------- sweep ----------------
  int tot_ev [9], tot_det [9], noise_det [9];
  initial begin
    for (int t = 1; t <= 8; t++) begin
      rst_n = 0;
      running = 0;
      thr = 5'(t);
      lcg = 32'd12345;
      ptr = 0;
      for (int k = 0; k < N_CH; k++) begin
        vin[k] = 0; ap_ph[k] = -1; n_req[k] = 0; m_refr[k] = 0; m_det[k] = 0;
        n_det[k] = 0; n_ev[k] = 0; cur_on[k] = 0; cur_off[k] = 0;
        for (int c = 0; c < 8; c++) begin hist_on[k][c] = 0; hist_off[k][c] = 0; end
      end
      repeat (3) @(negedge clk);
      rst_n = 1;
      running = 1;
      repeat (RUN_CYC) @(negedge clk);
      running = 0;
      for (int k = 0; k < N_CH; k++) vin[k] = 0;
      repeat (400) @(negedge clk);   // let the last slots and handshakes finish
      tot_ev[t] = 0; tot_det[t] = 0; noise_det[t] = 0;
      for (int k = 0; k < N_CH; k++) begin
        check(n_det[k] == m_det[k], $sformatf("thr %0d ch %0d: %0d detections, model %0d", t, k, n_det[k], m_det[k]));
        check(n_req[k] == n_det[k], $sformatf("thr %0d ch %0d: %0d requests for %0d detections", t, k, n_req[k], n_det[k]));
        tot_ev[t] += n_ev[k];
        tot_det[t] += n_det[k];
        if (k % 4 == 3) noise_det[t] += n_det[k];
      end
      $display("threshold %0d: %0d events, %0d detections (%0d on noise-only channels), reduction %0d.%01dx",
               t, tot_ev[t], tot_det[t], noise_det[t],
               tot_ev[t] / (tot_det[t] > 0 ? tot_det[t] : 1),
               (tot_ev[t] * 10 / (tot_det[t] > 0 ? tot_det[t] : 1)) % 10);
      if (t > 1) check(tot_det[t] <= tot_det[t-1], $sformatf("detections do not grow from threshold %0d to %0d", t - 1, t));
    end
    // the quantizer model keeps its reference level across a reset, so the
    // first event of a channel may differ between runs
    check(tot_ev[1] - tot_ev[8] <= int'(N_CH) && tot_ev[8] - tot_ev[1] <= int'(N_CH), "same input in every run");
    check(tot_det[8] > 0 && tot_det[1] > tot_det[8], "threshold 8 reduces events more than threshold 1");
    check(noise_det[1] > 0 && noise_det[5] < noise_det[1], "noise detections fall with the threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8 * (RUN_CYC + 500)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
