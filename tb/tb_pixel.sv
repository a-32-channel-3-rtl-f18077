// tb_pixel: one pixel driven through a behavioural model of its analog
// quantizer (coarse threshold 40, fine threshold 10). Checks: a constant input
// and noise below the coarse threshold give no events; a step above the coarse
// threshold gives exactly one ON event and opens the fine window; a small step
// then gives another event only while the fine window is open; a biphasic
// action-potential-like waveform produces ON and OFF events and one spike
// detection, delivered with a complete req/ack handshake.
module tb_pixel;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0, slot_tick = 0, ack = 0;
  int   vin = 0;
  logic cmp_hi, cmp_lo, amp_rst, thr_fine, on_ev, off_ev, spike, req;
  int checks = 0, failures = 0;
  int n_on = 0, n_off = 0, n_spk = 0, n_hs = 0, cyc = 0;

  dtdm_analog_model #(.TH_COARSE(40), .TH_FINE(10)) u_an (.clk, .vin, .amp_rst, .thr_fine, .cmp_hi, .cmp_lo);
  pixel dut (.clk, .rst_n, .slot_tick, .cmp_hi, .cmp_lo, .amp_rst, .thr_fine,
             .spd_thr(5'd5), .spd_refr(4'd15), .on_ev, .off_ev, .spike, .req, .ack);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    slot_tick <= (cyc % 16 == 15);
    if (on_ev) n_on++;
    if (off_ev) n_off++;
    if (spike) n_spk++;
  end
  always @(posedge clk) if (rst_n) begin
    if (req && !ack) ack <= 1;
    else if (!req && ack) begin ack <= 0; n_hs++; end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  initial begin
    int base;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (300) @(negedge clk);
    check(n_on == 0 && n_off == 0, "no events on constant input");
    for (int i = 0; i < 600; i++) begin @(negedge clk); vin = $urandom_range(0, 70) - 35; end
    vin = 0;
    repeat (5) @(negedge clk);
    check(n_on == 0 && n_off == 0, $sformatf("noise below coarse threshold rejected (%0d/%0d)", n_on, n_off));
    // coarse step
    vin = 45;
    repeat (5) @(negedge clk);
    check(n_on == 1 && n_off == 0, "one ON event for a coarse step");
    check(thr_fine, "fine window opened");
    // fine step inside the window
    vin = 57;
    repeat (5) @(negedge clk);
    check(n_on == 2, "fine step detected inside the window");
    // let the window close, then the same small step is ignored
    repeat (200) @(negedge clk);
    check(!thr_fine, "window closed after 1.5 ms without events");
    vin = 69;
    repeat (5) @(negedge clk);
    check(n_on == 2, "small step ignored with the coarse window");
    repeat (400) @(negedge clk);
    // biphasic waveform: -300 over 40 cycles, +500 over 60, back over 40
    n_on = 0; n_off = 0; n_spk = 0;
    base = vin;
    for (int i = 1; i <= 40; i++) begin @(negedge clk); vin = base - 300 * i / 40; end
    for (int i = 1; i <= 60; i++) begin @(negedge clk); vin = base - 300 + 500 * i / 60; end
    for (int i = 1; i <= 40; i++) begin @(negedge clk); vin = base + 200 - 200 * i / 40; end
    repeat (300) @(negedge clk);
    check(n_off >= 8 && n_on >= 10, $sformatf("waveform tracked with %0d ON / %0d OFF events", n_on, n_off));
    check(n_spk == 1, $sformatf("one spike detected (%0d)", n_spk));
    check(n_hs == n_spk && !req, "request handshake completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
