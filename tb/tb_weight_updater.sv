// tb_weight_updater: loads a full network (2656 weights) with one pointer set
// and a stream of writes with random gaps, recording every memory write the
// updater issues, and checks that each weight lands at the layer, row and
// column of row-major order (L1 32x32, L2 32x48, L3 48x2) and that the pointer
// wraps back to layer 1. A second pointer set checks a write in mid-table.
module tb_weight_updater;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0, wu_set = 0, wu_valid = 0, we;
  layer_e wu_layer = LAYER_L1, wlayer;
  logic [5:0] wu_row = 0, wu_col = 0, wrow, wcol;
  weight_t wu_data = 0, wdata;
  int checks = 0, failures = 0, nwr = 0;
  int exp_l [$], exp_r [$], exp_c [$], exp_d [$];

  weight_updater dut (.clk, .rst_n, .wu_set, .wu_layer, .wu_row, .wu_col, .wu_valid, .wu_data,
                      .we, .wlayer, .wrow, .wcol, .wdata);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  always @(posedge clk) if (rst_n && we) begin
    nwr++;
    if (exp_l.size() == 0) check(0, "unexpected write");
    else begin
      check(int'(wlayer) == exp_l[0] && int'(wrow) == exp_r[0] && int'(wcol) == exp_c[0] && int'(wdata) == exp_d[0],
            $sformatf("write %0d: L%0d r%0d c%0d d%0d, exp L%0d r%0d c%0d d%0d", nwr, wlayer, wrow, wcol, wdata,
                      exp_l[0], exp_r[0], exp_c[0], exp_d[0]));
      void'(exp_l.pop_front()); void'(exp_r.pop_front()); void'(exp_c.pop_front()); void'(exp_d.pop_front());
    end
  end

  task automatic put(input int l, input int r, input int c);
    int d;
    d = $urandom_range(0, 15) - 8;
    exp_l.push_back(l); exp_r.push_back(r); exp_c.push_back(c); exp_d.push_back(d);
    @(negedge clk); wu_valid = 1; wu_data = weight_t'(d);
    @(negedge clk); wu_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  initial begin
    int dims [3][2] = '{'{32, 32}, '{32, 48}, '{48, 2}};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); wu_set = 1; wu_layer = LAYER_L1; wu_row = 0; wu_col = 0;
    @(negedge clk); wu_set = 0;
    for (int l = 0; l < 3; l++)
      for (int r = 0; r < dims[l][0]; r++)
        for (int c = 0; c < dims[l][1]; c++) put(l, r, c);
    put(0, 0, 0);   // wrapped to layer 1
    @(negedge clk); wu_set = 1; wu_layer = LAYER_L2; wu_row = 6'd31; wu_col = 6'd47;
    @(negedge clk); wu_set = 0;
    put(1, 31, 47);
    put(2, 0, 0);
    repeat (3) @(negedge clk);
    check(nwr == 2656 + 3, $sformatf("writes %0d", nwr));
    check(exp_l.size() == 0, "all writes seen");
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
