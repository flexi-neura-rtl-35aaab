// tb_neuron_mem: neuron state memory with the synaptic model built (9-bit
// Vm + 8-bit Isyn = 17 bits, rounded to 3 bytes, the paper's example). Writes
// rows through the compute port, reads them back by byte over the SPI port,
// writes bytes over SPI and reads the fields through the compute port.
//
// Timing checked: reads return data in the cycle after the read strobe on
// both ports. The byte-rounded row is the published layout; the order of the
// fields in the row is this design's. A watchdog bounds the run.
module tb_neuron_mem;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 12, VW = 9, IW = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rd_en = 0, we = 0, b_en = 0, b_we = 0;
  naddr_t addr = 0, b_row = 0;
  logic signed [VW-1:0] vm_d = 0, vm_q;
  logic signed [IW-1:0] isyn_d = 0, isyn_q;
  logic [10:0] b_byte = 0;
  logic [7:0] b_wdata = 0, b_rdata;
  int vm_ref [N], is_ref [N];

  neuron_mem #(.N(N), .V_W(VW), .I_W(IW), .SYNAPTIC(1'b1)) dut (.*);

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
    for (int i = 0; i < N; i++) begin
      vm_ref[i] = sext($urandom, VW); is_ref[i] = sext($urandom, IW);
      @(negedge clk); we = 1; addr = naddr_t'(i);
      vm_d = VW'(vm_ref[i]); isyn_d = IW'(is_ref[i]);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < N; i++) begin
      logic [23:0] row;
      row = 24'({IW'(is_ref[i]), VW'(vm_ref[i])});
      for (int b = 0; b < 3; b++) begin
        @(negedge clk); b_en = 1; b_row = naddr_t'(i); b_byte = 11'(b);
        @(negedge clk); b_en = 0;
        chk(int'(b_rdata), int'(row[b*8 +: 8]), $sformatf("row %0d byte %0d", i, b));
      end
    end
    // SPI byte writes, compute read
    for (int i = 0; i < N; i++) begin
      logic [23:0] row;
      vm_ref[i] = sext($urandom, VW); is_ref[i] = sext($urandom, IW);
      row = 24'({IW'(is_ref[i]), VW'(vm_ref[i])});
      for (int b = 0; b < 3; b++) begin
        @(negedge clk); b_en = 1; b_we = 1; b_row = naddr_t'(i); b_byte = 11'(b);
        b_wdata = row[b*8 +: 8];
      end
      @(negedge clk); b_en = 0; b_we = 0;
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk); rd_en = 1; addr = naddr_t'(i);
      @(negedge clk); rd_en = 0;
      chk(int'(vm_q), vm_ref[i], "vm");
      chk(int'(isyn_q), is_ref[i], "isyn");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
