// tb_bilif_neuron: random sequences of leak, weight and activation strobes on
// one bipolar LIF neuron, compared cycle by cycle with an integer model:
// leak v -= v >>> L, saturating +/- weight accumulation, firing at >= vth
// (positive) or <= -vth (negative) with reset to zero, and hold while en = 0.
// Runs also drive the membrane into both saturation limits.
module tb_bilif_neuron;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, leak = 0, w_valid = 0, w_neg = 0, act_valid = 0;
  logic [SHIFT_BITS-1:0] shift = 3;
  weight_t weight = '0;
  vmem_t vth = 16'sd20, vmem;
  tern_t spk;
  int checks = 0, failures = 0;
  int mv = 0, ms = 0, npos = 0, nneg = 0, nsat = 0;

  bilif_neuron dut (.clk, .rst_n, .en, .leak, .shift, .w_valid, .w_neg, .weight, .act_valid, .vth, .vmem, .spk);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  function automatic int sat(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  task automatic step(input int op, input int wv, input bit ng, input bit e);
    @(negedge clk);
    en = e; leak = (op == 0); w_valid = (op == 1); act_valid = (op == 2);
    weight = weight_t'(wv); w_neg = ng;
    @(negedge clk);
    leak = 0; w_valid = 0; act_valid = 0; en = 1;
    if (e) begin
      case (op)
        0: mv = mv - (mv >>> int'(shift));
        1: begin mv = sat(ng ? mv - wv : mv + wv); if (mv == 32767 || mv == -32768) nsat++; end
        2: if (mv >= int'(vth)) begin ms = 1; mv = 0; npos++; end
           else if (mv <= -int'(vth)) begin ms = -1; mv = 0; nneg++; end
           else ms = 0;
        default: ;
      endcase
    end
    check(int'(vmem) == mv, $sformatf("vmem %0d expected %0d", vmem, mv));
    check((ms == 1) == spk.pos && (ms == -1) == spk.neg, $sformatf("spk %b expected %0d", spk, ms));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      if (t % 500 == 0) shift = SHIFT_BITS'($urandom_range(0, 6));
      if (t % 700 == 0) vth = vmem_t'($urandom_range(1, 60));
      step($urandom_range(0, 5) < 4 ? 1 : $urandom_range(0, 2), $urandom_range(0, 15) - 8,
           $urandom_range(0, 1), $urandom_range(0, 9) != 0);
    end
    // low threshold, slow leak: both polarities fire often
    vth = 16'sd3; shift = SHIFT_BITS'(6);
    for (int t = 0; t < 400; t++)
      step($urandom_range(0, 5) < 4 ? 1 : $urandom_range(0, 2), $urandom_range(0, 15) - 8,
           $urandom_range(0, 1), $urandom_range(0, 3) != 0);
    // drive into saturation: large threshold, many max weights
    vth = 16'sd32767;
    for (int t = 0; t < 5000; t++) step(1, 7, 1'b0, 1'b1);
    for (int t = 0; t < 10000; t++) step(1, -8, 1'b0, 1'b1);
    check(npos > 10 && nneg > 10, $sformatf("both firing polarities exercised (%0d/%0d)", npos, nneg));
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
