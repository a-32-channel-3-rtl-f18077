// tb_dtdm_ctrl: drives comparator crossings into the DTDM controller and
// checks the event polarity, the two-cycle amplifier reset, that crossings
// during the reset are ignored, and that the fine window lasts exactly 192
// cycles (1.5 ms at 128 kHz) after the last event before falling back to the
// coarse window.
module tb_dtdm_ctrl;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmp_hi = 0, cmp_lo = 0;
  logic spikep, spiken, amp_rst, thr_fine;
  int checks = 0, failures = 0;
  int np = 0, nn = 0, fine_cycles = 0;

  dtdm_ctrl dut (.clk, .rst_n, .cmp_hi, .cmp_lo, .spikep, .spiken, .amp_rst, .thr_fine);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (spikep) np++;
    if (spiken) nn++;
  end

  // one-cycle comparator pulse, then check the response
  task automatic cross_and_check(input bit up);
    @(negedge clk); cmp_hi = up; cmp_lo = !up;
    @(negedge clk); cmp_hi = 0; cmp_lo = 0;
    check(spikep == up && spiken == !up, "event polarity");
    check(amp_rst && thr_fine, "reset and fine window after event");
    @(negedge clk);
    check(!spikep && !spiken, "event lasts one cycle");
    check(amp_rst, "reset second cycle");
    @(negedge clk);
    check(!amp_rst, "reset released after two cycles");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!thr_fine && !amp_rst && !spikep && !spiken, "idle after reset: coarse window");
    cross_and_check(1'b1);
    check(np == 1 && nn == 0, "one ON event");
    // crossing held during the reset is ignored
    @(negedge clk); cmp_lo = 1;
    @(negedge clk); cmp_lo = 0;
    @(negedge clk);
    check(nn == 1, "OFF event counted once");
    @(negedge clk); cmp_lo = 1;   // arrives in reset window of previous event
    @(negedge clk); cmp_lo = 0;
    @(negedge clk);
    check(nn == 2, "second OFF event after reset released");
    // measure the fine window from the last event
    fine_cycles = 0;
    while (thr_fine) begin @(negedge clk); fine_cycles++; end
    check(fine_cycles >= 188 && fine_cycles <= 192, $sformatf("fine window %0d cycles after last check", fine_cycles));
    cross_and_check(1'b0);
    fine_cycles = 0;
    while (thr_fine) begin @(negedge clk); fine_cycles++; end
    // cross_and_check consumed 3 cycles of the window
    check(fine_cycles == 192 - 2, $sformatf("fine window length %0d", fine_cycles + 2));
    repeat (50) @(negedge clk);
    check(!thr_fine, "stays coarse without events");
    // a crossing held for three cycles gives one event: the reset masks it
    np = 0;
    @(negedge clk); cmp_hi = 1;
    repeat (3) @(negedge clk);
    cmp_hi = 0;
    repeat (3) @(negedge clk);
    check(np == 1, $sformatf("held crossing gave %0d events", np));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
