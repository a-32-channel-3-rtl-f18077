// tb_mode_ctrl: frame-valid strobes with a fake core that answers after a
// random time. Checks that with inference enabled each frame raises hi_supply
// and core_en, gives exactly one core_start after the 4-cycle settle time, and
// returns to idle right after core_done; that frames arriving during an
// inference are counted as dropped; and that with inference disabled the core
// stays in idle mode.
module tb_mode_ctrl;
  logic clk = 0, rst_n = 0, infer_en = 1, frame_valid = 0, core_done = 0;
  logic hi_supply, core_en, core_start;
  logic [7:0] frames_dropped;
  int checks = 0, failures = 0, nstart = 0, en_cycles = 0;

  mode_ctrl dut (.clk, .rst_n, .infer_en, .frame_valid, .core_done, .hi_supply, .core_en, .core_start, .frames_dropped);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (core_start) nstart++;
    if (core_en) en_cycles++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  task automatic frame(input int run_cycles, input bit extra_frame);
    int s0 = nstart, d;
    @(negedge clk); frame_valid = 1;
    @(negedge clk); frame_valid = 0;
    if (!infer_en) begin
      repeat (20) @(negedge clk);
      check(!hi_supply && !core_en && nstart == s0, "stays idle when inference is disabled");
      return;
    end
    check(hi_supply && core_en, "mode raised after frame valid");
    d = 0;
    while (!core_start) begin @(negedge clk); d++; end
    check(d == 4, $sformatf("start after %0d settle cycles", d));
    @(negedge clk);
    for (int c = 0; c < run_cycles; c++) begin
      if (extra_frame && c == 3) frame_valid = 1;
      @(negedge clk);
      frame_valid = 0;
      check(core_en && hi_supply, "mode held during inference");
    end
    core_done = 1;
    @(negedge clk); core_done = 0;
    check(!core_en && !hi_supply, "idle right after done");
    check(nstart == s0 + 1, "one start per frame");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    check(!hi_supply && !core_en, "idle after reset");
    for (int k = 0; k < 20; k++) frame($urandom_range(5, 200), 1'b0);
    frame(20, 1'b1);
    check(frames_dropped == 8'd1, "frame during inference dropped");
    infer_en = 0;
    frame(10, 1'b0);
    infer_en = 1;
    frame(10, 1'b0);
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
