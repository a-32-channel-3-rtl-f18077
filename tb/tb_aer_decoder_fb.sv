// tb_aer_decoder_fb: sends AER transfers with random channels and delays,
// including addresses without the valid bit and repeated channels, and checks
// each 32-bit frame against the set of valid channels sent within that frame,
// the one-cycle frame_valid strobe and the 512-cycle (4 ms) frame spacing.
module tb_aer_decoder_fb;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0;
  logic aer_req = 0, aer_ack, frame_tick, frame_valid, slot_tick;
  logic [AER_AW-1:0] aer_addr = '0;
  logic [N_CH-1:0] frame, exp_frame = '0;
  int checks = 0, failures = 0, nframes = 0, last_fv = -1, cyc = 0;
  logic [N_CH-1:0] exp_q [$];

  timebase u_tb (.clk, .rst_n, .slot_tick, .frame_tick);
  aer_decoder_fb dut (.clk, .rst_n, .aer_req, .aer_addr, .aer_ack, .frame_tick, .frame, .frame_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    // an event is accepted in the cycle where req is high and ack still low;
    // one accepted together with frame_tick still belongs to the closing frame
    if (aer_req && !aer_ack && aer_addr[5]) exp_frame[aer_addr[4:0]] = 1'b1;
    if (frame_tick) begin
      exp_q.push_back(exp_frame);
      exp_frame = '0;
    end
    if (frame_valid) begin
      if (last_fv >= 0) check(cyc - last_fv == 512, "frame spacing 512 cycles");
      last_fv = cyc;
      if (exp_q.size() > 0) check(frame == exp_q.pop_front(), $sformatf("frame %0d content %h", nframes, frame));
      nframes++;
    end
  end

  initial begin
    int ch;
    bit vld;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < 400; e++) begin
      repeat ($urandom_range(0, 12)) @(posedge clk);
      ch  = $urandom_range(0, N_CH - 1);
      vld = ($urandom_range(0, 9) != 0);
      aer_addr <= {vld, 5'(ch)};
      aer_req  <= 1;
      @(posedge clk);
      while (!aer_ack) @(posedge clk);
      // the event is counted in the frame that is open when it is accepted
      aer_req <= 0;
      @(posedge clk);
      while (aer_ack) @(posedge clk);
    end
    repeat (1100) @(posedge clk);
    check(nframes >= 5, $sformatf("frames %0d", nframes));
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
