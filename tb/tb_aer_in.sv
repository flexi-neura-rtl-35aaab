// tb_aer_in: a four-phase sender offers 200 random packets while the queue's
// full flag toggles at random. Checks that each packet is pushed exactly once,
// in order, never while full, and that ack follows the handshake.
//
// Interface driven: the link side (req/data/ack) and the queue's full flag;
// the push strobe is observed. Timing: a packet is pushed in the cycle ack
// rises, one push per handshake. The rule "forward only when the queue has
// space" is the published one; the four-phase protocol is this design's.
// A watchdog ends the run after 100,000 cycles.
module tb_aer_in;
  import flexi_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic aer_req = 0, aer_ack, push, fifo_full = 0;
  pkt_t aer_data = 0, push_data;
  pkt_t sent[$], got[$];
  int stalls = 0;

  aer_in dut (.*);

  task automatic chk(longint got_v, longint exp, string what);
    checks++;
    if (got_v != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got_v, exp);
    end
  endtask

  always @(posedge clk) begin
    if (push) begin
      got.push_back(push_data);
      checks++;
      if (fifo_full) begin failures++; $display("FAIL push while full"); end
    end
    if (aer_req && !aer_ack && fifo_full) stalls++;
    fifo_full <= ($urandom % 3) == 0;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      pkt_t p = pkt_t'($urandom);
      sent.push_back(p);
      @(negedge clk); aer_data = p; aer_req = 1;
      while (!aer_ack) @(negedge clk);
      aer_req = 0;
      while (aer_ack) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    chk(got.size(), sent.size(), "packet count");
    foreach (sent[i]) if (i < got.size()) chk(got[i], sent[i], "packet order");
    chk(stalls > 0, 1, "backpressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
