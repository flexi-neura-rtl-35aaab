// tb_spi_host: SPI master model used by the core and system testbenches.
//
// Generates 46-cycle frames (mode 0, MSB first, cs_n low for the frame) with
// an SCK half period of H clock cycles, and offers tasks for the operations
// of the host driver: select a core, write a configuration register, write or
// read a memory byte, and load a whole synaptic matrix row by row.
//
// Interface: sck/cs_n/mosi out, miso in; frames are generated on the falling
// edge of the testbench clock. The frame format follows the published design;
// mode 0 and the byte position of read data are this design's.
module tb_spi_host #(
  parameter int H = 3
) (
  input  logic clk,
  output logic sck,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);
  import flexi_pkg::*;

  int frames = 0;

  initial begin
    sck = 0; cs_n = 1; mosi = 0;
  end

  task automatic frame(logic [22:0] a, logic [22:0] d, output logic [22:0] rx);
    logic [45:0] bits;
    bits = {a, d};
    rx = '0;
    @(negedge clk);
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
    repeat (2 * H) @(negedge clk);
    frames++;
  endtask

  task automatic cfg_write(cfg_reg_e r, int value);
    logic [22:0] rx;
    frame({1'b0, 1'b1, 2'b00, 19'(r)}, 23'(value), rx);
  endtask

  task automatic select_core(int id);
    cfg_write(REG_CORE_NUMBER, id);
  endtask

  task automatic mem_write(mem_target_e t, logic [18:0] a, logic [7:0] d);
    logic [22:0] rx;
    frame({1'b1, 1'b1, 2'(t), a}, 23'(d), rx);
  endtask

  task automatic mem_read(mem_target_e t, logic [18:0] a, output logic [7:0] d);
    logic [22:0] rx;
    frame({1'b1, 1'b0, 2'(t), a}, 23'd0, rx);
    d = rx[7:0];
  endtask

  // Load w[s][d] (s < ns source neurons, d < nd destinations, wb-bit weights)
  // into the selected core's synaptic memory t. Only sources with used[s] set
  // are written (rows of unused sources are never read).
  task automatic load_weights(mem_target_e t, int w [][], int ns, int nd, int wb,
                              bit used []);
    int rows;
    rows = 1;
    while (rows * 8 < nd) rows *= 2;
    for (int s = 0; s < ns; s++) begin
      if (!used[s]) continue;
      for (int r = 0; r < rows; r++) begin
        logic [8*16-1:0] row;
        row = '0;
        for (int j = 0; j < 8; j++)
          if (r * 8 + j < nd)
            for (int b = 0; b < wb; b++) row[j*wb + b] = 1'((w[s][r*8+j] >> b) & 1);
        for (int b = 0; b < wb; b++)
          mem_write(t, {6'(b), 13'(s * rows + r)}, row[b*8 +: 8]);
      end
    end
  endtask

  // Clear the state rows of neurons 0..n-1 (nbytes bytes each).
  task automatic clear_states(int n, int nbytes);
    for (int j = 0; j < n; j++)
      for (int b = 0; b < nbytes; b++) mem_write(MEM_NEUR, {11'(b), 8'(j)}, 8'h00);
  endtask
endmodule
