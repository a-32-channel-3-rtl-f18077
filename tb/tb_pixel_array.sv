// tb_pixel_array: all 32 pixels, each behind its own analog quantizer model.
// A random subset of channels receives an action-potential-like waveform, the
// rest receive sub-threshold noise. Checks that exactly the stimulated
// channels detect a spike, that each raises req on its own line, that every
// request completes its handshake, and that amplifier resets stay per channel.
module tb_pixel_array;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0, slot_tick = 0;
  int   vin [N_CH];
  logic [N_CH-1:0] cmp_hi, cmp_lo, amp_rst, thr_fine, on_ev, off_ev, spike, req, ack = '0;
  logic [N_CH-1:0] active;
  int checks = 0, failures = 0, cyc = 0;
  int n_spk [N_CH], n_hs [N_CH], n_ev [N_CH];

  for (genvar k = 0; k < N_CH; k++) begin : g_an
    dtdm_analog_model #(.TH_COARSE(40), .TH_FINE(10)) u_an (
      .clk, .vin(vin[k]), .amp_rst(amp_rst[k]), .thr_fine(thr_fine[k]),
      .cmp_hi(cmp_hi[k]), .cmp_lo(cmp_lo[k]));
  end

  pixel_array dut (.clk, .rst_n, .slot_tick, .cmp_hi, .cmp_lo, .amp_rst, .thr_fine,
                   .spd_thr(5'd5), .spd_refr(4'd15), .on_ev, .off_ev, .spike, .req, .ack);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    slot_tick <= (cyc % 16 == 15);
    for (int k = 0; k < N_CH; k++) begin
      if (spike[k]) n_spk[k]++;
      if (on_ev[k] || off_ev[k]) n_ev[k]++;
      if (req[k] && !ack[k]) ack[k] <= 1;
      else if (!req[k] && ack[k]) begin ack[k] <= 0; n_hs[k]++; end
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  initial begin
    for (int k = 0; k < N_CH; k++) begin vin[k] = 0; n_spk[k] = 0; n_hs[k] = 0; n_ev[k] = 0; end
    active = $urandom();
    active[0] = 1'b1;
    active[5] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (50) @(negedge clk);
    for (int i = 0; i < 140; i++) begin
      @(negedge clk);
      for (int k = 0; k < N_CH; k++) begin
        if (active[k]) begin
          if (i < 40)       vin[k] = -300 * (i + 1) / 40;
          else if (i < 100) vin[k] = -300 + 500 * (i - 39) / 60;
          else              vin[k] = 200 - 200 * (i - 99) / 40;
        end else begin
          vin[k] = $urandom_range(0, 60) - 30;
        end
      end
    end
    for (int k = 0; k < N_CH; k++) if (!active[k]) vin[k] = 0;
    repeat (400) @(negedge clk);
    for (int k = 0; k < N_CH; k++) begin
      check((n_spk[k] == 1) == active[k], $sformatf("channel %0d spikes %0d active %0d", k, n_spk[k], active[k]));
      check(n_hs[k] == n_spk[k], $sformatf("channel %0d handshakes %0d", k, n_hs[k]));
      check((n_ev[k] > 0) == active[k], $sformatf("channel %0d events %0d", k, n_ev[k]));
    end
    check(req == '0 && ack == '0, "all handshakes closed");
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
