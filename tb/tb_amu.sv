// tb_amu: packets enter through AER-IN from a four-phase sender, are popped
// from the feedforward queue by a slow consumer (so the queue fills and the
// sender is held off), handed to AER-OUT and received by a four-phase
// receiver. Checks order and count end to end, that backpressure happened,
// and the recurrent queue's order.
//
// Interface driven: both AER links and the controller-side queue ports.
// Timing is not fixed by the published design; the test checks function and
// that the input link is held off while the queue is full. A watchdog bounds
// the run.
module tb_amu;
  import flexi_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_req = 0, in_ack, out_req, out_ack = 0;
  pkt_t in_data = 0, out_data;
  logic ff_valid, ff_pop = 0, rec_push = 0, rec_valid, rec_pop = 0;
  pkt_t ff_data, tx_data = 0;
  naddr_t rec_wdata = 0, rec_data;
  logic tx_valid = 0, tx_ready;
  pkt_t sent[$], got[$];
  int stalls = 0;
  localparam int NPKT = 60;

  amu #(.FF_DEPTH(4), .N(8), .RECURRENT(1'b1)) dut (.*);

  task automatic chk(longint got_v, longint exp, string what);
    checks++;
    if (got_v != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got_v, exp);
    end
  endtask

  always @(posedge clk) if (in_req && !in_ack && dut.full) stalls++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender
  initial begin
    repeat (3) @(negedge clk);
    for (int i = 0; i < NPKT; i++) begin
      pkt_t p = pkt_t'($urandom);
      sent.push_back(p);
      @(negedge clk); in_data = p; in_req = 1;
      while (!in_ack) @(negedge clk);
      in_req = 0;
      while (in_ack) @(negedge clk);
    end
  end

  // receiver
  initial begin
    forever begin
      @(negedge clk);
      if (out_req && !out_ack) begin
        got.push_back(out_data);
        out_ack = 1;
        while (out_req) @(negedge clk);
        out_ack = 0;
      end
    end
  end

  // slow consumer: queue head -> AER-OUT
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (60) @(negedge clk);      // let the queue fill
    for (int i = 0; i < NPKT; i++) begin
      while (!ff_valid) @(negedge clk);
      tx_data = ff_data; tx_valid = 1;
      @(posedge clk);
      while (!tx_ready) @(posedge clk);
      @(negedge clk); tx_valid = 0; ff_pop = 1;
      @(negedge clk); ff_pop = 0;
    end
    repeat (20) @(negedge clk);
    chk(got.size(), NPKT, "packet count");
    foreach (sent[i]) if (i < got.size()) chk(got[i], sent[i], "order");
    chk(stalls > 0, 1, "backpressure");
    // recurrent queue
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); rec_push = 1; rec_wdata = naddr_t'(7 - i);
    end
    @(negedge clk); rec_push = 0;
    for (int i = 0; i < 8; i++) begin
      chk(rec_valid, 1, "rec valid");
      chk(rec_data, 7 - i, "rec order");
      @(negedge clk); rec_pop = 1;
      @(negedge clk); rec_pop = 0;
    end
    chk(rec_valid, 0, "rec empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
