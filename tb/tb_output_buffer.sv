// tb_output_buffer: random velocity pairs captured on out_valid, read with
// random delays. Checks the held values, the ready flag, its clearing by a
// read, and the overrun flag when a result is overwritten unread.
module tb_output_buffer;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0, out_valid = 0, rd = 0, vel_ready, overrun;
  vmem_t vel [L3_N], vel_q [L3_N];
  int checks = 0, failures = 0, n_ovr = 0;

  output_buffer dut (.clk, .rst_n, .out_valid, .vel, .rd, .vel_q, .vel_ready, .overrun);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  initial begin
    vmem_t x, y;
    bit skip_read;
    vel[0] = 0; vel[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!vel_ready && !overrun, "empty after reset");
    skip_read = 0;
    for (int k = 0; k < 200; k++) begin
      bit was_ready;
      was_ready = vel_ready;
      x = vmem_t'($urandom()); y = vmem_t'($urandom());
      @(negedge clk); vel[0] = x; vel[1] = y; out_valid = 1;
      @(negedge clk); out_valid = 0; vel[0] = ~x; vel[1] = ~y;
      check(vel_ready, "ready after capture");
      check(overrun == was_ready, "overrun iff previous result unread");
      if (overrun) n_ovr++;
      repeat ($urandom_range(0, 5)) @(negedge clk);
      check(vel_q[0] == x && vel_q[1] == y, "captured values held");
      skip_read = ($urandom_range(0, 3) == 0);
      if (!skip_read) begin
        @(negedge clk); rd = 1;
        @(negedge clk); rd = 0;
        check(!vel_ready && !overrun, "read clears ready");
      end
    end
    check(n_ovr > 10, "overrun exercised");
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
