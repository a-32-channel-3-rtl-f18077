// tb_li_neuron: random leak and weight strobes on one leaky-integrate output
// neuron, compared every cycle with an integer model (v -= v >>> L; saturating
// signed accumulation; hold while en = 0), including both saturation limits.
module tb_li_neuron;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, leak = 0, w_valid = 0, w_neg = 0;
  logic [SHIFT_BITS-1:0] shift = 2;
  weight_t weight = '0;
  vmem_t vmem;
  int checks = 0, failures = 0, mv = 0, nsat = 0;

  li_neuron dut (.clk, .rst_n, .en, .leak, .shift, .w_valid, .w_neg, .weight, .vmem);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  task automatic step(input bit lk, input int wv, input bit ng, input bit e);
    @(negedge clk);
    en = e; leak = lk; w_valid = !lk; weight = weight_t'(wv); w_neg = ng;
    @(negedge clk);
    leak = 0; w_valid = 0; en = 1;
    if (e) begin
      if (lk) mv = mv - (mv >>> int'(shift));
      else begin
        mv = ng ? mv - wv : mv + wv;
        if (mv > 32767) begin mv = 32767; nsat++; end
        if (mv < -32768) begin mv = -32768; nsat++; end
      end
    end
    check(int'(vmem) == mv, $sformatf("vmem %0d expected %0d", vmem, mv));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      if (t % 400 == 0) shift = SHIFT_BITS'($urandom_range(0, 8));
      step($urandom_range(0, 9) == 0, $urandom_range(0, 15) - 8, $urandom_range(0, 1), $urandom_range(0, 9) != 0);
    end
    for (int t = 0; t < 5000; t++) step(1'b0, 7, 1'b0, 1'b1);
    for (int t = 0; t < 10000; t++) step(1'b0, 7, 1'b1, 1'b1);
    check(nsat > 100, "saturation exercised");
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
