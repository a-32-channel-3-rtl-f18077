// tb_snn_layer: two layers as used in the core, a 32-input 48-neuron bipolar
// LIF layer and a 48-input 2-neuron leaky-integrate layer, both loaded with
// random weights through the write port. Random ternary inputs are applied for
// many time steps; after each done strobe every membrane potential and every
// ternary activation is compared with the integer reference model, and the
// start-to-done latency is checked against 2*A + 4 cycles.
module tb_snn_layer;
  import bmi_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 32, NO = 48, NI3 = 48, NO3 = 2;
  logic clk = 0, rst_n = 0, start = 0, we = 0;
  logic leak_en = 1;
  logic [SHIFT_BITS-1:0] shift = 2;
  vmem_t vth = 16'sd12;
  logic [5:0] wrow = 0, wcol = 0;
  weight_t wdata = 0;
  tern_t in_a [NI], in_b [NI3], spk_a [NO], spk_b [NO3];
  vmem_t vm_a [NO], vm_b [NO3];
  logic done_a, done_b, busy_a, busy_b, we_a = 0, we_b = 0;
  int checks = 0, failures = 0, nfire = 0;
  int wa [], wb [], va [], vb [], sa [], sb [], ia [], ib [];

  snn_layer #(.N_IN(NI), .N_OUT(NO), .FIRE(1'b1)) dut_a (
    .clk, .rst_n, .en(1'b1), .start, .in_vec(in_a), .leak_en, .shift, .vth,
    .we(we_a), .wrow(wrow[4:0]), .wcol(wcol[5:0]), .wdata, .spk(spk_a), .vmem(vm_a), .done(done_a), .busy(busy_a));
  snn_layer #(.N_IN(NI3), .N_OUT(NO3), .FIRE(1'b0)) dut_b (
    .clk, .rst_n, .en(1'b1), .start, .in_vec(in_b), .leak_en, .shift, .vth,
    .we(we_b), .wrow(wrow[5:0]), .wcol(wcol[0:0]), .wdata, .spk(spk_b), .vmem(vm_b), .done(done_b), .busy(busy_b));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  initial begin
    int aa, ab, cyc, ta, tb_;
    wa = new[NI * NO]; wb = new[NI3 * NO3];
    va = new[NO]; vb = new[NO3]; sa = new[NO]; sb = new[NO3]; ia = new[NI]; ib = new[NI3];
    foreach (va[j]) begin va[j] = 0; sa[j] = 0; end
    foreach (vb[j]) begin vb[j] = 0; sb[j] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++) for (int j = 0; j < NO; j++) begin
      @(negedge clk); we_a = 1; we_b = 0; wrow = 6'(i); wcol = 6'(j);
      wa[i * NO + j] = $urandom_range(0, 15) - 8; wdata = weight_t'(wa[i * NO + j]);
    end
    for (int i = 0; i < NI3; i++) for (int j = 0; j < NO3; j++) begin
      @(negedge clk); we_a = 0; we_b = 1; wrow = 6'(i); wcol = 6'(j);
      wb[i * NO3 + j] = $urandom_range(0, 15) - 8; wdata = weight_t'(wb[i * NO3 + j]);
    end
    @(negedge clk); we_a = 0; we_b = 0;
    for (int t = 0; t < 60; t++) begin
      if (t % 20 == 0) begin shift = SHIFT_BITS'($urandom_range(1, 5)); leak_en = (t != 20); end
      aa = 0; ab = 0;
      for (int i = 0; i < NI; i++) begin
        int r;
        r = $urandom_range(0, 9);
        ia[i] = r < 2 ? 1 : (r < 4 ? -1 : 0);
        in_a[i] = '{pos: ia[i] == 1, neg: ia[i] == -1};
        if (ia[i] != 0) aa++;
      end
      for (int i = 0; i < NI3; i++) begin
        int r;
        r = $urandom_range(0, 9);
        ib[i] = r < 3 ? 1 : (r < 5 ? -1 : 0);
        in_b[i] = '{pos: ib[i] == 1, neg: ib[i] == -1};
        if (ib[i] != 0) ab++;
      end
      layer_step(NI, NO, ia, wa, va, sa, int'(shift), leak_en, int'(vth), 1'b1);
      layer_step(NI3, NO3, ib, wb, vb, sb, int'(shift), leak_en, int'(vth), 1'b0);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1; ta = -1; tb_ = -1;
      while (ta < 0 || tb_ < 0) begin
        if (done_a && ta < 0) ta = cyc;
        if (done_b && tb_ < 0) tb_ = cyc;
        @(negedge clk); cyc++;
      end
      check(ta == 2 * aa + 4, $sformatf("latency A %0d for %0d inputs", ta, aa));
      check(tb_ == 2 * ab + 4, $sformatf("latency B %0d for %0d inputs", tb_, ab));
      for (int j = 0; j < NO; j++) begin
        check(int'(vm_a[j]) == va[j], $sformatf("t%0d A vmem[%0d] %0d exp %0d", t, j, vm_a[j], va[j]));
        check(spk_a[j].pos == (sa[j] == 1) && spk_a[j].neg == (sa[j] == -1), $sformatf("t%0d A spk[%0d]", t, j));
        if (sa[j] != 0) nfire++;
      end
      for (int j = 0; j < NO3; j++)
        check(int'(vm_b[j]) == vb[j], $sformatf("t%0d B vmem[%0d] %0d exp %0d", t, j, vm_b[j], vb[j]));
    end
    check(nfire > 50, $sformatf("firing exercised (%0d)", nfire));
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
