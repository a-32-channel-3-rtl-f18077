// tb_snn_decoder: the decoder subsystem on its own. The testbench plays the
// AER arbiter (random channels, four-phase transfers), loads all 2656 weights
// through the weight updater and sets thresholds through the config port. For
// every frame it checks the frame buffer against the channels it sent, the
// decoded velocities in the output buffer against the integer reference
// model, and that hi_supply is high only around an inference. With inference
// disabled frames are still buffered but no velocity is produced.
module tb_snn_decoder;
  import bmi_pkg::*;
  import snn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic aer_req = 0, aer_ack, slot_tick, frame_tick;
  logic [AER_AW-1:0] aer_addr = '0;
  logic cfg_we = 0, wu_set = 0, wu_valid = 0, vel_rd = 0;
  logic [1:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0, cfg_rdata;
  layer_e wu_layer = LAYER_L1;
  logic [5:0] wu_row = 0, wu_col = 0;
  weight_t wu_data = 0;
  vmem_t vel [L3_N];
  logic vel_ready, vel_overrun, hi_supply, frame_valid;
  logic [7:0] frames_dropped;
  logic [4:0] spd_thr;
  logic [3:0] spd_refr;
  logic [N_CH-1:0] frame_q, sent = '0;
  int checks = 0, failures = 0, nframes = 0, nvel = 0, hi_cycles = 0;
  int w1 [], w2 [], w3 [], v1 [], v2 [], v3 [], s1 [], s2 [], s3 [], x [];
  logic [N_CH-1:0] exp_q [$];
  bit infer_on = 1;

  timebase u_tb (.clk, .rst_n, .slot_tick, .frame_tick);
  snn_decoder dut (
    .clk, .rst_n, .aer_req, .aer_addr, .aer_ack, .frame_tick,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .spd_thr, .spd_refr,
    .wu_set, .wu_layer, .wu_row, .wu_col, .wu_valid, .wu_data,
    .vel_rd, .vel, .vel_ready, .vel_overrun, .hi_supply, .frames_dropped, .frame_q, .frame_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  task automatic cfg_write(input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 2'(a); cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  // frame bookkeeping: what was accepted before each frame_tick
  always @(posedge clk) if (rst_n) begin
    if (aer_req && !aer_ack && aer_addr[5]) sent[aer_addr[4:0]] = 1'b1;
    if (frame_tick) begin exp_q.push_back(sent); sent = '0; end
    if (hi_supply) hi_cycles++;
  end

  // check each frame and its decoded result
  initial begin
    forever begin
      int lat;
      @(posedge clk);
      if (rst_n && frame_valid) begin
        nframes++;
        check(exp_q.size() > 0 && frame_q == exp_q[0], $sformatf("frame %0d = %h", nframes, frame_q));
        if (exp_q.size() > 0) void'(exp_q.pop_front());
        if (infer_on && w3.size() > 0) begin
          for (int i = 0; i < L1_N; i++) x[i] = frame_q[i];
          layer_step(L1_N, L1_N, x, w1, v1, s1, 3, 1'b1, 5, 1'b1);
          layer_step(L1_N, L2_N, s1, w2, v2, s2, 3, 1'b1, 5, 1'b1);
          layer_step(L2_N, L3_N, s2, w3, v3, s3, 3, 1'b1, 0, 1'b0);
          lat = 0;
          while (!vel_ready && lat < 400) begin @(posedge clk); lat++; end
          #1;
          check(vel_ready, "velocity produced");
          check(int'(vel[0]) == v3[0] && int'(vel[1]) == v3[1],
                $sformatf("vel %0d,%0d exp %0d,%0d", vel[0], vel[1], v3[0], v3[1]));
          @(negedge clk); vel_rd = 1; nvel++;
          @(negedge clk); vel_rd = 0;
          check(!hi_supply, "back in idle mode after the inference");
        end else begin
          repeat (300) @(posedge clk);
          check(!vel_ready && !hi_supply, "no inference while disabled");
        end
      end
    end
  end

  initial begin
    v1 = new[L1_N]; v2 = new[L2_N]; v3 = new[L3_N]; s1 = new[L1_N]; s2 = new[L2_N]; s3 = new[L3_N]; x = new[L1_N];
    foreach (v1[j]) begin v1[j] = 0; s1[j] = 0; end
    foreach (v2[j]) begin v2[j] = 0; s2[j] = 0; end
    foreach (v3[j]) begin v3[j] = 0; s3[j] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // inference off while loading
    cfg_write(3, {4'd8, 5'd5, 1'b0, 1'b1}); infer_on = 0;
    cfg_write(0, 5); cfg_write(1, 5);
    check(spd_thr == 5'd5 && spd_refr == 4'd8, "detector settings exported");
    @(negedge clk); wu_set = 1; wu_layer = LAYER_L1; wu_row = 0; wu_col = 0;
    @(negedge clk); wu_set = 0;
    begin
      int n = 0;
      int tmp [];
      w1 = new[L1_N * L1_N]; w2 = new[L1_N * L2_N]; tmp = new[L2_N * L3_N];
      for (int k = 0; k < 2656; k++) begin
        int d;
        d = $urandom_range(0, 15) - 8;
        if (k < 1024) w1[k] = d; else if (k < 2560) w2[k - 1024] = d; else tmp[k - 2560] = d;
        @(negedge clk); wu_valid = 1; wu_data = weight_t'(d);
      end
      @(negedge clk); wu_valid = 0;
      // wait for a frame boundary before enabling inference, so the model
      // and the core start from the same (zero) membrane state
      @(posedge frame_valid);
      repeat (2) @(negedge clk);
      w3 = tmp;
      cfg_write(3, {4'd8, 5'd5, 1'b1, 1'b1}); infer_on = 1;
    end
    // AER traffic for 10 frames
    for (int e = 0; e < 600; e++) begin
      repeat ($urandom_range(0, 12)) @(posedge clk);
      aer_addr <= {1'b1, 5'($urandom_range(0, N_CH - 1))};
      aer_req  <= 1;
      @(posedge clk);
      while (!aer_ack) @(posedge clk);
      aer_req <= 0;
      @(posedge clk);
      while (aer_ack) @(posedge clk);
    end
    repeat (1200) @(posedge clk);
    check(nvel >= 5, $sformatf("decoded frames %0d", nvel));
    check(frames_dropped == 0, "no dropped frames");
    check(hi_cycles < nvel * 300, "core mostly idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
