// tb_timebase: checks the slot and frame strobe periods of the timebase at its
// default 128 kHz settings (16 cycles = 125 us, 512 cycles = 4 ms) and that
// each strobe lasts one cycle.
module tb_timebase;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0;
  logic slot_tick, frame_tick;
  int checks = 0, failures = 0;
  int cyc = 0, last_slot = -1, last_frame = -1, nslot = 0, nframe = 0;

  timebase dut (.clk, .rst_n, .slot_tick, .frame_tick);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (slot_tick) begin
      if (last_slot >= 0) check(cyc - last_slot == 16, $sformatf("slot period %0d", cyc - last_slot));
      last_slot = cyc; nslot++;
    end
    if (frame_tick) begin
      if (last_frame >= 0) check(cyc - last_frame == 512, $sformatf("frame period %0d", cyc - last_frame));
      check(slot_tick, "frame strobe coincides with a slot strobe");
      last_frame = cyc; nframe++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    check(nframe == 5, $sformatf("frames seen %0d", nframe));
    check(nslot >= 187, $sformatf("slots seen %0d", nslot));
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
