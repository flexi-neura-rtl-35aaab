// tb_scheduler: random pushes and pops on both queues of a recurrent
// scheduler (feedforward depth 8, 12 neurons -> recurrent depth 16), checked
// against SystemVerilog queues: order, valid flags and the full flag.
//
// Timing checked: a pushed entry is visible at the head in the next cycle
// (show-ahead). Two queues, the recurrent one only in recurrent builds, follow
// the published design; the depths are this design's. A watchdog ends the run
// after 100,000 cycles.
module tb_scheduler;
  import flexi_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ff_push = 0, ff_full, ff_valid, ff_pop = 0;
  pkt_t ff_wdata = 0, ff_data;
  logic rec_push = 0, rec_valid, rec_pop = 0;
  naddr_t rec_wdata = 0, rec_data;
  pkt_t   mff[$];
  naddr_t mrec[$];
  int n_full = 0;

  scheduler #(.FF_DEPTH(8), .N(12), .RECURRENT(1'b1)) dut (.*);

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got, exp);
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
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(ff_valid, mff.size() != 0, "ff valid");
      chk(ff_full, mff.size() == 8, "ff full");
      chk(rec_valid, mrec.size() != 0, "rec valid");
      if (mff.size() != 0)  chk(ff_data, mff[0], "ff head");
      if (mrec.size() != 0) chk(rec_data, mrec[0], "rec head");
      if (ff_full) n_full++;
      ff_push  = (i < 1500 ? ($urandom % 3 != 0) : ($urandom % 3 == 0)) && !ff_full;
      ff_wdata = pkt_t'($urandom);
      ff_pop   = ($urandom % 2 == 0) && ff_valid;
      rec_push = ($urandom % 2 == 0) && mrec.size() < 16;
      rec_wdata = naddr_t'($urandom);
      rec_pop  = ($urandom % 2 == 0) && rec_valid;
      @(posedge clk);
      if (ff_pop) void'(mff.pop_front());
      if (ff_push) mff.push_back(ff_wdata);
      if (rec_pop) void'(mrec.pop_front());
      if (rec_push) mrec.push_back(rec_wdata);
    end
    chk(n_full > 0, 1, "queue reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
