// tb_synapse_ctrl: random ternary input vectors into a 48-input synapse
// controller. Checks the order of the weight-row reads (ascending active
// inputs only, zeros skipped), the sign delivered with each row, one leak
// strobe first when leak_en is set, one act_valid after the last row, and the
// 2*A + 4 cycle latency from start to done for A active inputs. Some runs
// toggle the clock enable and check that only enabled cycles count.
module tb_synapse_ctrl;
  import bmi_pkg::*;
  localparam int N = 48;
  logic clk = 0, rst_n = 0, en = 1, start = 0, leak_en = 1;
  tern_t in_vec [N];
  logic mem_re, leak, w_valid, w_neg, act_valid, done, busy;
  logic [5:0] mem_rrow;
  int checks = 0, failures = 0;
  int rows_q [$];
  int negs_q [$];
  int nleak, nact, en_cycles, ndel;
  int last_row;

  synapse_ctrl #(.N_IN(N)) dut (.clk, .rst_n, .en, .start, .in_vec, .leak_en, .mem_re, .mem_rrow,
                                .leak, .w_valid, .w_neg, .act_valid, .done, .busy);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  always @(posedge clk) if (rst_n && en) begin
    if (busy) en_cycles++;
    if (leak) begin nleak++; check(ndel == 0, "leak before any row"); end
    if (mem_re) begin last_row = int'(mem_rrow); end
    if (w_valid) begin
      ndel++;
      check(rows_q.size() > 0 && last_row == rows_q[0], $sformatf("row delivered %0d", last_row));
      if (rows_q.size() > 0) begin
        check(int'(w_neg) == negs_q[0], "sign of row");
        void'(rows_q.pop_front()); void'(negs_q.pop_front());
      end
    end
    if (act_valid) begin nact++; check(rows_q.size() == 0, "act_valid after all rows"); end
  end

  task automatic run(input int density, input bit toggle_en);
    int a = 0;
    rows_q.delete(); negs_q.delete();
    nleak = 0; nact = 0; en_cycles = 0; ndel = 0;
    leak_en = $urandom_range(0, 1);
    for (int i = 0; i < N; i++) begin
      int r;
      r = $urandom_range(0, 99);
      in_vec[i] = '{pos: r < density / 2, neg: (r >= density / 2) && (r < density)};
      if (r < density) begin a++; rows_q.push_back(i); negs_q.push_back(r >= density / 2); end
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    en_cycles = 0;  // busy cycles: LEAK through DONE
    while (!done) begin
      @(negedge clk);
      if (toggle_en) en = $urandom_range(0, 2) != 0;
    end
    en = 1;
    @(negedge clk);
    check(en_cycles == 2 * a + 4, $sformatf("latency %0d for %0d active inputs", en_cycles, a));
    check(nleak == int'(leak_en), "leak strobes");
    check(nact == 1, "one act_valid");
    check(ndel == a, "one delivery per active input");
    check(!busy, "idle after done");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 0);
    run(100, 0);
    for (int k = 0; k < 100; k++) run($urandom_range(0, 100), k % 3 == 0);
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
