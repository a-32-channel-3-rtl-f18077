// tb_aer_arbiter: 32 pixel-side request sources that raise req at random times
// and follow the four-phase protocol, and a decoder-side responder with random
// delays. Checks that every request is delivered exactly once with the right
// address {1, channel}, that ack only goes to a requesting pixel, and that
// simultaneous requests are served in round-robin order.
module tb_aer_arbiter;
  import bmi_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_CH-1:0] req = '0, ack;
  logic aer_req, aer_ack = 0;
  logic [AER_AW-1:0] aer_addr;
  int checks = 0, failures = 0;
  int sent [N_CH], recv [N_CH];
  int order_q [$];

  aer_arbiter dut (.clk, .rst_n, .req, .ack, .aer_req, .aer_addr, .aer_ack);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  // decoder side
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && aer_req && !aer_ack) begin
        repeat ($urandom_range(0, 2)) @(posedge clk);
        check(aer_addr[5] == 1'b1, "address valid bit");
        recv[aer_addr[4:0]]++;
        order_q.push_back(int'(aer_addr[4:0]));
        aer_ack <= 1;
        while (aer_req) @(posedge clk);
        aer_ack <= 0;
      end
    end
  end

  // pixel side: drop req when acked
  always @(posedge clk) begin
    for (int k = 0; k < N_CH; k++) begin
      if (rst_n && ack[k]) begin
        check(req[k] || sent[k] > 0, "ack only to a requester");
        req[k] <= 1'b0;
      end
    end
  end

  initial begin
    for (int k = 0; k < N_CH; k++) begin sent[k] = 0; recv[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // all request at once: served 0,1,2,...,31 after reset (last = 31)
    @(negedge clk);
    req = '1;
    for (int k = 0; k < N_CH; k++) sent[k]++;
    while (req != '0 || ack != '0) @(negedge clk);
    check(order_q.size() == N_CH, "all 32 delivered");
    for (int k = 0; k < N_CH && k < order_q.size(); k++)
      check(order_q[k] == k, $sformatf("round robin order pos %0d got %0d", k, order_q[k]));
    // random traffic
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int k = 0; k < N_CH; k++)
        if (!req[k] && !ack[k] && $urandom_range(0, 999) < 3) begin req[k] = 1; sent[k]++; end
    end
    repeat (500) @(negedge clk);
    for (int k = 0; k < N_CH; k++)
      check(sent[k] == recv[k], $sformatf("channel %0d sent %0d received %0d", k, sent[k], recv[k]));
    check(ack == '0 && !aer_req, "link idle at the end");
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
