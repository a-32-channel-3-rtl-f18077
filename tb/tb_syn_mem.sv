// tb_syn_mem: fills a 32x48 synaptic memory with random signed weights in
// random order, then reads every row and checks all 48 weights one cycle after
// the read strobe, and that the output holds when no read is issued.
module tb_syn_mem;
  import bmi_pkg::*;
  localparam int R = 32, C = 48;
  logic clk = 0, we = 0, re = 0;
  logic [4:0] wrow = '0, rrow = '0;
  logic [5:0] wcol = '0;
  weight_t wdata = '0;
  weight_t rdata [C];
  int model [R][C];
  int checks = 0, failures = 0;

  syn_mem #(.ROWS(R), .COLS(C)) dut (.clk, .we, .wrow, .wcol, .wdata, .re, .rrow, .rdata);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  initial begin
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      @(negedge clk);
      we = 1; wrow = 5'(r); wcol = 6'(c);
      model[r][c] = $urandom_range(0, 15) - 8;
      wdata = weight_t'(model[r][c]);
    end
    // overwrite some at random
    for (int k = 0; k < 300; k++) begin
      int r, c;
      @(negedge clk);
      r = $urandom_range(0, R - 1); c = $urandom_range(0, C - 1);
      we = 1; wrow = 5'(r); wcol = 6'(c);
      model[r][c] = $urandom_range(0, 15) - 8;
      wdata = weight_t'(model[r][c]);
    end
    @(negedge clk); we = 0;
    for (int r = R - 1; r >= 0; r--) begin
      @(negedge clk); re = 1; rrow = 5'(r);
      @(negedge clk); re = 0; rrow = 5'((r + 7) % R);
      for (int c = 0; c < C; c++)
        check(int'(rdata[c]) == model[r][c], $sformatf("row %0d col %0d got %0d exp %0d", r, c, rdata[c], model[r][c]));
      @(negedge clk);
      check(int'(rdata[0]) == model[r][0], "output holds without read");
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
