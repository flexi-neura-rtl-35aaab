// tb_aer_out: the controller side offers 200 random packets (valid held until
// ready); a four-phase receiver answers with random delays. Checks that the
// receiver gets every packet once and in order, that ready comes exactly once
// per packet and only after the acknowledge, and the req/ack protocol.
//
// Interface driven: valid/data from the controller side and ack from the
// receiver model. Timing: ready is a one-cycle pulse in the cycle after ack is
// seen. Transfer by handshake is the published behaviour; the protocol and the
// valid/ready side are this design's. A watchdog bounds the run.
module tb_aer_out;
  import flexi_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid = 0, ready, aer_req, aer_ack = 0;
  pkt_t data = 0, aer_data;
  pkt_t sent[$], got[$];
  int n_ready = 0;

  aer_out dut (.*);

  always @(posedge clk) if (ready) n_ready++;

  // receiver: random delay before ack and before dropping it
  initial begin
    forever begin
      @(negedge clk);
      if (aer_req && !aer_ack) begin
        repeat ($urandom % 4) @(negedge clk);
        got.push_back(aer_data);
        aer_ack = 1;
        while (aer_req) @(negedge clk);
        repeat ($urandom % 3) @(negedge clk);
        aer_ack = 0;
      end
    end
  end

  task automatic chk(longint got_v, longint exp, string what);
    checks++;
    if (got_v != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got_v, exp);
    end
  endtask

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
      @(negedge clk); valid = 1; data = p;
      @(posedge clk);
      while (!ready) @(posedge clk);
      chk(got.size(), i + 1, "ready only after the receiver took the packet");
      @(negedge clk); valid = 0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    chk(got.size(), sent.size(), "packet count");
    chk(n_ready, sent.size(), "ready pulses");
    foreach (sent[i]) if (i < got.size()) chk(got[i], sent[i], "packet order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
