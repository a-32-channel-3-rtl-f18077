// tb_snn_core: the full 32-48-2 Bi-SNN core with random 4-bit weights in all
// three memories and a sequence of random 32-bit input frames. After every
// out_valid both 16-bit velocity outputs are compared with the chained integer
// reference model (binary inputs -> 32 bipolar LIF -> 48 bipolar LIF -> 2
// leaky integrators), and the frame latency is checked against the sum of the
// three layers' 2*A + 4 cycles, A being each layer's number of nonzero inputs.
module tb_snn_core;
  import bmi_pkg::*;
  import snn_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, start = 0, we = 0;
  logic [L1_N-1:0] frame = '0;
  cfg_t cfg = CFG_DEFAULT;
  layer_e wlayer = LAYER_L1;
  logic [5:0] wrow = 0, wcol = 0;
  weight_t wdata = 0;
  vmem_t vel [L3_N];
  logic out_valid, busy;
  int checks = 0, failures = 0;
  int w1 [], w2 [], w3 [], v1 [], v2 [], v3 [], s1 [], s2 [], s3 [], x [];
  int nz_out = 0;

  snn_core dut (.clk, .rst_n, .en, .start, .frame, .cfg, .we, .wlayer, .wrow, .wcol, .wdata,
                .vel, .out_valid, .busy);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  task automatic load(input layer_e l, input int ni, input int no, ref int w []);
    w = new[ni * no];
    for (int i = 0; i < ni; i++) for (int j = 0; j < no; j++) begin
      @(negedge clk); we = 1; wlayer = l; wrow = 6'(i); wcol = 6'(j);
      w[i * no + j] = $urandom_range(0, 15) - 8; wdata = weight_t'(w[i * no + j]);
    end
    @(negedge clk); we = 0;
  endtask

  function automatic int nnz(input int a []);
    int n = 0;
    foreach (a[i]) if (a[i] != 0) n++;
    return n;
  endfunction

  initial begin
    int exp_lat, lat;
    v1 = new[L1_N]; v2 = new[L2_N]; v3 = new[L3_N]; s1 = new[L1_N]; s2 = new[L2_N]; s3 = new[L3_N]; x = new[L1_N];
    foreach (v1[j]) begin v1[j] = 0; s1[j] = 0; end
    foreach (v2[j]) begin v2[j] = 0; s2[j] = 0; end
    foreach (v3[j]) begin v3[j] = 0; s3[j] = 0; end
    cfg.vth_l1 = 16'sd6; cfg.vth_l2 = 16'sd6;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(LAYER_L1, L1_N, L1_N, w1);
    load(LAYER_L2, L1_N, L2_N, w2);
    load(LAYER_L3, L2_N, L3_N, w3);
    for (int t = 0; t < 80; t++) begin
      frame = {$urandom(), $urandom()} >> $urandom_range(0, 40);
      for (int i = 0; i < L1_N; i++) x[i] = frame[i];
      exp_lat = 2 * nnz(x) + 4;
      layer_step(L1_N, L1_N, x, w1, v1, s1, int'(cfg.shift_l1), cfg.leak_en, int'(cfg.vth_l1), 1'b1);
      exp_lat += 2 * nnz(s1) + 4;
      layer_step(L1_N, L2_N, s1, w2, v2, s2, int'(cfg.shift_l2), cfg.leak_en, int'(cfg.vth_l2), 1'b1);
      exp_lat += 2 * nnz(s2) + 4;
      layer_step(L2_N, L3_N, s2, w3, v3, s3, int'(cfg.shift_l3), cfg.leak_en, 0, 1'b0);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      check(lat == exp_lat, $sformatf("frame %0d latency %0d exp %0d", t, lat, exp_lat));
      for (int j = 0; j < L3_N; j++) begin
        check(int'(vel[j]) == v3[j], $sformatf("frame %0d vel[%0d] %0d exp %0d", t, j, vel[j], v3[j]));
        if (v3[j] != 0) nz_out++;
      end
      @(negedge clk);
      check(!busy, "core idle after out_valid");
    end
    check(nz_out > 40, "outputs are not trivially zero");
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
