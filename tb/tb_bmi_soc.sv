// tb_bmi_soc: end-to-end run of the whole chip at its default parameters.
//
// Each of the 32 channels has a behavioural model of its analog quantizer
// (coarse threshold 40, fine threshold 10) driven by background noise, rare
// noise transients and, on channels with a nonzero firing rate, biphasic
// action-potential waveforms. The testbench loads all weights through the
// weight updater and programs the configuration port, then runs three phases:
//   1. inference disabled: frames are buffered, the core stays in idle mode
//   2. inference enabled: every frame is decoded; one result is left unread
//   3. leak off, thresholds 0, all weights +7: the output integrators run into
//      16-bit saturation (overflow check)
// Checks: each frame against the spike detections seen on the pixel outputs
// (allowing for AER delivery across a frame edge), every decoded velocity pair
// against the integer reference model run on the delivered frames, and that
// the mode output is high only around inferences, and that channels carrying
// only noise produce DTDM events but no spike detection. Every mechanism of the design
// is counted and must occur at least once.
module tb_bmi_soc;
  import bmi_pkg::*;
  import snn_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int   vin [N_CH];
  logic [N_CH-1:0] cmp_hi, cmp_lo, amp_rst, thr_fine, on_ev, off_ev, spike, frame_q;
  logic cfg_we = 0, wu_set = 0, wu_valid = 0, vel_rd = 0;
  logic [1:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0, cfg_rdata;
  layer_e wu_layer = LAYER_L1;
  logic [5:0] wu_row = 0, wu_col = 0;
  weight_t wu_data = 0;
  vmem_t vel [L3_N];
  logic vel_ready, vel_overrun, hi_supply, frame_valid;
  logic [7:0] frames_dropped;

  int checks = 0, failures = 0, cyc = 0;
  // mirrored configuration
  int c_vth1 = 5, c_vth2 = 5, c_shift = 3;
  bit c_leak = 1, c_infer = 0, skip_read = 0, track = 0;
  int w1 [], w2 [], w3 [], v1 [], v2 [], v3 [], s1 [], s2 [], s3 [], x [];
  int rate [N_CH];
  // mechanism counters
  int n_fine = 0, n_coarse = 0, n_events = 0, n_det = 0, n_refr = 0, n_contend = 0;
  int n_merge = 0, n_wake = 0, n_idle_frames = 0, n_dec = 0, n_overrun = 0, n_sat = 0;
  longint n_mac = 0;
  int n_l1p = 0, n_l1n = 0, n_l2p = 0, n_l2n = 0, n_leak_frames = 0, n_noise_only = 0, n_noise_det = 0;
  int det_cyc [N_CH][$];
  int last_tick = 0;
  logic [N_CH-1:0] tf_d = '0, hi_d = 0;
  int det_in_frame [N_CH];

  for (genvar k = 0; k < N_CH; k++) begin : g_an
    dtdm_analog_model #(.TH_COARSE(40), .TH_FINE(10)) u_an (
      .clk, .vin(vin[k]), .amp_rst(amp_rst[k]), .thr_fine(thr_fine[k]),
      .cmp_hi(cmp_hi[k]), .cmp_lo(cmp_lo[k]));
  end

  bmi_soc dut (
    .clk, .rst_n, .cmp_hi, .cmp_lo, .amp_rst, .thr_fine,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .wu_set, .wu_layer, .wu_row, .wu_col, .wu_valid, .wu_data,
    .vel_rd, .vel, .vel_ready, .vel_overrun, .hi_supply, .frames_dropped,
    .on_ev, .off_ev, .spike, .frame_q, .frame_valid);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  // ---------------- stimulus: noise plus action potentials ----------------
  int ap_ph [N_CH];
  function automatic int ap_shape(input int i);
    if (i < 40)       return -300 * (i + 1) / 40;
    else if (i < 100) return -300 + 500 * (i - 39) / 60;
    else              return 200 - 200 * (i - 99) / 40;
  endfunction
  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < N_CH; k++) begin
      int n;
      if (ap_ph[k] < 0 && rate[k] > 0 && $urandom_range(0, 99999) < rate[k]) ap_ph[k] = 0;
      n = $urandom_range(0, 8) - 4;
      if ($urandom_range(0, 9999) < 3) n = ($urandom_range(0, 1) ? 55 : -55);   // noise transient
      if (ap_ph[k] >= 0) begin
        vin[k] = n + ap_shape(ap_ph[k]);
        ap_ph[k]++;
        if (ap_ph[k] == 140) ap_ph[k] = -1;
      end else begin
        vin[k] = n;
      end
    end
  end

  // ---------------- monitors ----------------
  // detections suppressed by a running refractory counter (internal probe)
  logic [N_CH-1:0] refr_hit;
  for (genvar k = 0; k < N_CH; k++) begin : g_probe
    assign refr_hit[k] = dut.u_px.g_px[k].u_px.u_spd.cmp_pend &&
                         dut.u_px.g_px[k].u_px.u_spd.refr_cnt != 0 &&
                         dut.u_px.g_px[k].u_px.u_spd.sum >= dut.u_px.g_px[k].u_px.u_spd.thr;
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int k = 0; k < N_CH; k++) begin
      if (thr_fine[k] && !tf_d[k]) n_fine++;
      if (!thr_fine[k] && tf_d[k]) n_coarse++;
      if (on_ev[k] || off_ev[k]) begin
        n_events++;
        if (rate[k] == 0) n_noise_only++;
      end
      if (spike[k]) begin
        n_det++;
        if (rate[k] == 0) n_noise_det++;
        det_cyc[k].push_back(cyc);
        det_in_frame[k]++;
        if (det_in_frame[k] == 2) n_merge++;
      end
      if (refr_hit[k]) n_refr++;
    end
    tf_d = thr_fine;
    if ($countones(dut.px_req) >= 2) n_contend++;
    if (hi_supply && !hi_d) n_wake++;
    hi_d = hi_supply;
    if (vel_overrun) n_overrun++;
    // synaptic operations: each delivered weight row updates every neuron of the layer
    if (dut.u_dec.u_core.u_l1.u_ctrl.w_valid) n_mac += L1_N;
    if (dut.u_dec.u_core.u_l2.u_ctrl.w_valid) n_mac += L2_N;
    if (dut.u_dec.u_core.u_l3.u_ctrl.w_valid) n_mac += L3_N;
  end

  // frame check and decoded-velocity check
  initial begin
    forever begin
      int tick;
      bit must, may;
      @(posedge clk);
      if (rst_n && frame_valid) begin
        tick = cyc - 1;
        for (int k = 0; k < N_CH; k++) begin
          must = 0; may = 0;
          foreach (det_cyc[k][i]) begin
            if (det_cyc[k][i] >= last_tick && det_cyc[k][i] < tick - 250) must = 1;
            if (det_cyc[k][i] >= last_tick - 250 && det_cyc[k][i] <= tick) may = 1;
          end
          if (must) check(frame_q[k], $sformatf("channel %0d detected but missing from frame", k));
          if (frame_q[k]) check(may, $sformatf("channel %0d in frame without detection", k));
          while (det_cyc[k].size() > 0 && det_cyc[k][0] < tick - 600) void'(det_cyc[k].pop_front());
          det_in_frame[k] = 0;
        end
        last_tick = tick;
        if (!c_infer) begin
          n_idle_frames++;
          repeat (300) @(posedge clk);
          check(!hi_supply, "idle mode while inference is disabled");
        end else if (track) begin
          if (c_leak) n_leak_frames++;
          for (int i = 0; i < L1_N; i++) x[i] = frame_q[i];
          layer_step(L1_N, L1_N, x, w1, v1, s1, c_shift, c_leak, c_vth1, 1'b1);
          layer_step(L1_N, L2_N, s1, w2, v2, s2, c_shift, c_leak, c_vth2, 1'b1);
          layer_step(L2_N, L3_N, s2, w3, v3, s3, c_shift, c_leak, 0, 1'b0);
          foreach (s1[j]) begin if (s1[j] > 0) n_l1p++; if (s1[j] < 0) n_l1n++; end
          foreach (s2[j]) begin if (s2[j] > 0) n_l2p++; if (s2[j] < 0) n_l2n++; end
          if (v3[0] == 32767 || v3[1] == 32767 || v3[0] == -32768 || v3[1] == -32768) n_sat++;
          @(posedge clk);
          while (hi_supply) @(posedge clk);
          #1;
          check(vel_ready, "result in the output buffer");
          check(int'(vel[0]) == v3[0] && int'(vel[1]) == v3[1],
                $sformatf("vel %0d,%0d exp %0d,%0d", vel[0], vel[1], v3[0], v3[1]));
          n_dec++;
          if (!skip_read) begin
            @(negedge clk); vel_rd = 1;
            @(negedge clk); vel_rd = 0;
          end
        end
      end
    end
  end

  // ---------------- control ----------------
  task automatic cfg_write(input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 2'(a); cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic load_weights(input bit all_max);
    @(negedge clk); wu_set = 1; wu_layer = LAYER_L1; wu_row = 0; wu_col = 0;
    @(negedge clk); wu_set = 0;
    for (int k = 0; k < 2656; k++) begin
      int d;
      d = all_max ? 7 : $urandom_range(0, 15) - 8;
      if (k < 1024) w1[k] = d; else if (k < 2560) w2[k - 1024] = d; else w3[k - 2560] = d;
      @(negedge clk); wu_valid = 1; wu_data = weight_t'(d);
    end
    @(negedge clk); wu_valid = 0;
  endtask

  // change mode and leak between two frames, after the running inference has
  // finished, so the core and the model see the same settings
  task automatic set_infer(input bit on, input bit leak);
    @(posedge frame_valid);
    repeat (300) @(negedge clk);
    cfg_write(3, {4'd8, 5'd5, on, leak});
    c_infer = on; c_leak = leak;
  endtask

  initial begin
    w1 = new[L1_N * L1_N]; w2 = new[L1_N * L2_N]; w3 = new[L2_N * L3_N];
    v1 = new[L1_N]; v2 = new[L2_N]; v3 = new[L3_N]; s1 = new[L1_N]; s2 = new[L2_N]; s3 = new[L3_N]; x = new[L1_N];
    foreach (v1[j]) begin v1[j] = 0; s1[j] = 0; end
    foreach (v2[j]) begin v2[j] = 0; s2[j] = 0; end
    foreach (v3[j]) begin v3[j] = 0; s3[j] = 0; end
    for (int k = 0; k < N_CH; k++) begin
      vin[k] = 0; ap_ph[k] = -1; det_in_frame[k] = 0;
      rate[k] = (k % 4 == 3) ? 0 : 20 * (1 + (k % 7));    // per 100k cycles: about 25-180 Hz
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: idle mode, load the network
    cfg_write(3, {4'd8, 5'd5, 1'b0, 1'b1}); c_infer = 0;
    cfg_write(0, c_vth1); cfg_write(1, c_vth2);
    cfg_write(2, {4'd0, 4'(c_shift), 4'(c_shift), 4'(c_shift)});
    check(cfg_rdata == 16'h0333, "config read back");
    load_weights(1'b0);
    repeat (2) @(posedge frame_valid);
    // phase 2: decode
    set_infer(1'b1, 1'b1);
    track = 1;
    repeat (4) @(posedge frame_valid);
    skip_read = 1;
    repeat (2) @(posedge frame_valid);
    skip_read = 0;
    repeat (6) @(posedge frame_valid);
    // phase 3: drive the output integrators into saturation
    set_infer(1'b0, 1'b0);
    c_vth1 = 0; c_vth2 = 0;
    cfg_write(0, 0); cfg_write(1, 0);
    load_weights(1'b1);
    set_infer(1'b1, 1'b0);
    repeat (110) @(posedge frame_valid);
    repeat (400) @(posedge clk);

    $display("mechanisms: fine=%0d coarse=%0d events=%0d detections=%0d refractory=%0d contention=%0d merged=%0d",
             n_fine, n_coarse, n_events, n_det, n_refr, n_contend, n_merge);
    $display("            wake=%0d idle_frames=%0d decoded=%0d overrun=%0d saturated=%0d L1+/-=%0d/%0d L2+/-=%0d/%0d leak_frames=%0d",
             n_wake, n_idle_frames, n_dec, n_overrun, n_sat, n_l1p, n_l1n, n_l2p, n_l2n, n_leak_frames);
    // a dense network would do 32*32 + 32*48 + 48*2 = 2656 per frame
    $display("            synaptic operations %0d against %0d for dense layers: %0d.%01dx fewer",
             n_mac, longint'(n_dec) * 2656, longint'(n_dec) * 2656 / (n_mac > 0 ? n_mac : 1),
             (longint'(n_dec) * 26560 / (n_mac > 0 ? n_mac : 1)) % 10);
    check(n_mac > 0 && n_mac < longint'(n_dec) * 2656, "zero inputs skipped by the synapse controllers");
    check(n_fine > 0, "DTDM switched to the fine window");
    check(n_coarse > 0, "DTDM fell back to the coarse window");
    check(n_det > 0 && n_events > 5 * n_det, "spike detector reduces the event rate");
    check(n_noise_only > 0 && n_noise_det == 0,
          $sformatf("noise events on silent channels (%0d) filtered out (%0d detections)", n_noise_only, n_noise_det));
    check(n_refr > 0, "refractory period suppressed a detection");
    check(n_contend > 0, "AER arbitration between simultaneous requests");
    check(n_merge > 0, "two detections of one channel merged in one frame");
    check(n_idle_frames > 0, "frames buffered in idle mode");
    check(n_wake > 0 && n_wake == n_dec, "one idle->inference switch per decoded frame");
    check(n_overrun > 0, "output buffer overrun flagged");
    check(n_sat > 0, "membrane overflow saturated");
    check(n_l1p > 0 && n_l1n > 0 && n_l2p > 0 && n_l2n > 0, "positive and negative firing in both hidden layers");
    check(n_leak_frames > 0, "leak applied");
    check(frames_dropped == 0, "no dropped frames");
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
