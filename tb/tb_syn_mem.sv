// tb_syn_mem: fills a small synaptic memory (10 sources x 20 destinations,
// 6-bit weights: 16 blocks of 4 rows of 48 bits) byte by byte through the
// SPI port at row index src*4 + dst/8, then reads every weight through the
// compute port and every byte back through the SPI port.
//
// Timing checked: both ports return data in the cycle after the strobe.
// Block/row sizing follows the published rules; the bit order within a row is
// this design's. A watchdog bounds the run.
module tb_syn_mem;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int NS = 10, ND = 20, W = 6, ROWS = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rd_en = 0, b_en = 0, b_we = 0;
  naddr_t src = 0, dst = 0;
  logic signed [W-1:0] weight;
  logic [12:0] b_row = 0;
  logic [5:0] b_byte = 0;
  logic [7:0] b_wdata = 0, b_rdata;
  int wt [NS][ND];

  syn_mem #(.N_SRC(NS), .N_DST(ND), .W(W)) dut (.*);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (wt[s, d]) wt[s][d] = sext($urandom, W);
    // write each row as W bytes; weight j of the row sits at bits j*W
    for (int s = 0; s < NS; s++)
      for (int r = 0; r < ROWS; r++) begin
        logic [8*W-1:0] row;
        row = '0;
        for (int j = 0; j < 8; j++)
          if (r * 8 + j < ND) row[j*W +: W] = W'(wt[s][r*8+j]);
        for (int b = 0; b < W; b++) begin
          @(negedge clk);
          b_en = 1; b_we = 1; b_row = 13'(s * ROWS + r); b_byte = 6'(b);
          b_wdata = row[b*8 +: 8];
        end
      end
    @(negedge clk); b_en = 0; b_we = 0;
    foreach (wt[s, d]) begin
      @(negedge clk); rd_en = 1; src = naddr_t'(s); dst = naddr_t'(d);
      @(negedge clk); rd_en = 0;
      chk(int'(weight), wt[s][d], $sformatf("weight[%0d][%0d]", s, d));
    end
    // SPI read-back of row 5 (source 1, destinations 8..15)
    begin
      logic [8*W-1:0] row;
        row = '0;
      for (int j = 0; j < 8; j++) row[j*W +: W] = W'(wt[1][8+j]);
      for (int b = 0; b < W; b++) begin
        @(negedge clk); b_en = 1; b_we = 0; b_row = 13'(5); b_byte = 6'(b);
        @(negedge clk); b_en = 0;
        chk(int'(b_rdata), int'(row[b*8 +: 8]), $sformatf("byte %0d", b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
