// tb_snn_config: checks the reset defaults of the configuration registers,
// then random writes to all four addresses, comparing the decoded fields and
// the read-back word with a model of the register map.
module tb_snn_config;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [1:0] cfg_addr = 0;
  logic [15:0] cfg_wdata = 0, cfg_rdata;
  cfg_t cfg;
  logic [15:0] m [4];
  int checks = 0, failures = 0;

  snn_config dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .cfg);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  task automatic compare();
    check(cfg.vth_l1 == m[0], "vth_l1");
    check(cfg.vth_l2 == m[1], "vth_l2");
    check(cfg.shift_l1 == m[2][3:0] && cfg.shift_l2 == m[2][7:4] && cfg.shift_l3 == m[2][11:8], "shifts");
    check(cfg.leak_en == m[3][0] && cfg.infer_en == m[3][1] && cfg.spd_thr == m[3][6:2] && cfg.spd_refr == m[3][10:7], "control word");
    for (int a = 0; a < 4; a++) begin
      cfg_addr = 2'(a); #1;
      check(cfg_rdata == m[a], $sformatf("read back %0d: %h exp %h", a, cfg_rdata, m[a]));
    end
  endtask

  initial begin
    m[0] = 16'd8; m[1] = 16'd8; m[2] = 16'h0333; m[3] = {5'd0, 4'd8, 5'd5, 1'b1, 1'b1};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int k = 0; k < 200; k++) begin
      int a;
      logic [15:0] d;
      a = $urandom_range(0, 3);
      d = 16'($urandom());
      @(negedge clk);
      cfg_we = 1; cfg_addr = 2'(a); cfg_wdata = d;
      @(negedge clk);
      cfg_we = 0;
      case (a)
        0, 1: m[a] = d;
        2: m[a] = {4'd0, d[11:0]};
        default: m[a] = {5'd0, d[10:0]};
      endcase
      compare();
    end
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
