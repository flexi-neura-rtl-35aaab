// tb_spi_slave: drives 46-cycle SPI frames (mode 0, MSB first) into a slave
// with CORE_ID 3 and checks: core-number selection, configuration writes
// (accepted only when selected), memory write requests (target, address and
// data fields), memory read requests with the byte returned on MISO in frame
// cycles 38-45 and zeros before, and silence (no request, MISO not driven)
// when another core is selected.
//
// The SPI clock runs at 1/8 of the core clock (above the 1/4 minimum set by
// the synchronisers). The 46-cycle frame and its command fields follow the
// published design; SPI mode 0 and the exact MISO cycles are this design's.
// A watchdog bounds the run.
module tb_spi_slave;
  import flexi_pkg::*;

  localparam int H = 4;   // SCK half period in clk cycles
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sck = 0, cs_n = 1, mosi = 0, miso, miso_oe;
  logic mem_req, mem_we, mem_ack = 0, mem_rvalid = 0;
  mem_target_e mem_target;
  logic [18:0] mem_addr;
  logic [7:0] mem_wdata, mem_rdata = 8'hA5;
  cfg_t cfg;
  int n_req = 0;
  logic [22:0] last_req;
  logic [7:0]  last_wdata;

  spi_slave #(.CORE_ID(8'd3), .N(16)) dut (.*);

  // controller stand-in: acknowledge each request, return a byte for reads
  always_ff @(posedge clk) begin
    mem_ack    <= mem_req && !mem_ack;
    mem_rvalid <= mem_ack && !mem_we;
    if (mem_req && !mem_ack) begin
      n_req++;
      last_req   <= {1'b1, mem_we, mem_target, mem_addr};
      last_wdata <= mem_wdata;
    end
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  task automatic frame(logic [22:0] a, logic [22:0] d, output logic [22:0] rx);
    logic [45:0] bits;
    bits = {a, d};
    rx = '0;
    cs_n = 0;
    for (int k = 0; k < 46; k++) begin
      mosi = bits[45 - k];
      repeat (H) @(negedge clk);
      sck = 1;
      if (k >= 23) rx = {rx[21:0], miso};
      repeat (H) @(negedge clk);
      sck = 0;
    end
    repeat (H) @(negedge clk);
    cs_n = 1;
    repeat (4 * H) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [22:0] rx;
    int req0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // not selected yet: threshold write ignored
    frame({1'b0, 1'b1, 2'b00, 19'(REG_THRESHOLD)}, 23'd99, rx);
    chk(cfg.threshold, 0, "threshold ignored before selection");
    // select core 3
    frame({1'b0, 1'b1, 2'b00, 19'(REG_CORE_NUMBER)}, 23'd3, rx);
    chk(cfg.core_number, 3, "core number");
    frame({1'b0, 1'b1, 2'b00, 19'(REG_THRESHOLD)}, 23'h1234, rx);
    chk(cfg.threshold, 16'h1234, "threshold");
    frame({1'b0, 1'b1, 2'b00, 19'(REG_BETA_RATE)}, 23'h099, rx);
    chk(cfg.beta_rate, 9'h099, "beta rate");
    frame({1'b0, 1'b1, 2'b00, 19'(REG_NEURON_NUMBER)}, 23'd7, rx);
    chk(cfg.neuron_number, 7, "neuron number");
    frame({1'b0, 1'b1, 2'b00, 19'(REG_ACTIVITY_EN)}, 23'd1, rx);
    chk(cfg.activity_en, 1, "activity enable");
    // memory write: feedforward synapses, row 0x123, byte 4, data 0x5C
    req0 = n_req;
    frame({1'b1, 1'b1, 2'b01, 6'd4, 13'h123}, 23'h00005C, rx);
    chk(n_req - req0, 1, "write request count");
    chk(last_req, {1'b1, 1'b1, 2'b01, 6'd4, 13'h123}, "write request fields");
    chk(last_wdata, 8'h5C, "write data");
    // memory read: neuron state, row 9, byte 1
    req0 = n_req;
    mem_rdata = 8'hA5;
    frame({1'b1, 1'b0, 2'b00, 11'd1, 8'd9}, 23'd0, rx);
    chk(n_req - req0, 1, "read request count");
    chk(last_req, {1'b1, 1'b0, 2'b00, 11'd1, 8'd9}, "read request fields");
    chk(rx, 23'h0000A5, "MISO byte in cycles 38-45");
    mem_rdata = 8'h3C;
    frame({1'b1, 1'b0, 2'b10, 6'd2, 13'h7}, 23'd0, rx);
    chk(rx, 23'h00003C, "MISO byte, recurrent memory");
    // select another core: no request, no MISO
    frame({1'b0, 1'b1, 2'b00, 19'(REG_CORE_NUMBER)}, 23'd4, rx);
    req0 = n_req;
    frame({1'b1, 1'b1, 2'b01, 19'd5}, 23'd1, rx);
    frame({1'b1, 1'b0, 2'b00, 19'd5}, 23'd0, rx);
    chk(n_req - req0, 0, "no request when not selected");
    chk(rx, 0, "MISO silent when not selected");
    frame({1'b0, 1'b1, 2'b00, 19'(REG_THRESHOLD)}, 23'd5, rx);
    chk(cfg.threshold, 16'h1234, "threshold kept when not selected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
