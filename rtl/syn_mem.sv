// syn_mem: synaptic weight memory (feedforward or recurrent).
//
// Organisation, as the paper lays it out: one block per spike-source neuron,
// the block count rounded up to a power of two; in each block one row per
// group of 8 destination neurons, the row count rounded up to a power of two;
// each row holds 8 weights of W bits, so a row is exactly W bytes. The row
// address is {source neuron, destination neuron / 8} and the weight inside the
// row is selected by destination neuron mod 8 (weight j occupies bits
// [j*W +: W]; that ordering is this design's choice).
//
// Single-port synchronous RAM (one read or write per cycle, read data one
// cycle after the request), as block RAM maps it. Two users share the port:
//   - compute reads: rd_en with src/dst; weight is valid the next cycle;
//   - SPI byte access: b_en with a 13-bit row index and a byte offset; a write
//     updates one byte of the row, a read returns it on b_rdata the next cycle.
// The byte access wins when both are requested (the controller never does).
// For the recurrent memory of an ATA-T layer the source and destination
// neurons are both in the current layer.
module syn_mem
  import flexi_pkg::*;
#(
  parameter int N_SRC = 256,   // spike-source neurons
  parameter int N_DST = 128,   // destination neurons (this layer)
  parameter int W     = 6      // weight bit-width
) (
  input  logic                clk,
  // compute read
  input  logic                rd_en,
  input  naddr_t              src,
  input  naddr_t              dst,
  output logic signed [W-1:0] weight,
  // SPI byte access
  input  logic                b_en,
  input  logic                b_we,
  input  logic [12:0]         b_row,
  input  logic [5:0]          b_byte,
  input  logic [7:0]          b_wdata,
  output logic [7:0]          b_rdata
);

  localparam int BLK_BITS = (N_SRC > 1) ? $clog2(N_SRC) : 1;
  localparam int ROW_BITS = $clog2((N_DST + 7) / 8);
  localparam int ROWS_PB  = 1 << ROW_BITS;
  localparam int AW       = BLK_BITS + ROW_BITS;
  localparam int DEPTH    = 1 << AW;
  localparam int RW       = 8 * W;          // 8 weights per row

  logic [RW-1:0] mem [DEPTH];
  logic [RW-1:0] row_q;
  logic [2:0]    sel_q;
  logic [5:0]    byte_q;
  logic [AW-1:0] addr;

  always_comb begin
    if (b_en) addr = AW'(b_row);
    else      addr = AW'(32'(src) * ROWS_PB + 32'(dst) / 8);
  end

  always_ff @(posedge clk) begin
    if (b_en && b_we) begin
      for (int b = 0; b < W; b++)
        if (b_byte == 6'(b)) mem[addr][b*8 +: 8] <= b_wdata;
    end else if (b_en || rd_en) begin
      row_q <= mem[addr];
    end
    if (rd_en && !b_en) sel_q <= dst[2:0];
    if (b_en)           byte_q <= b_byte;
  end

  always_comb begin
    weight  = '0;
    b_rdata = '0;
    for (int j = 0; j < 8; j++)
      if (sel_q == 3'(j)) weight = row_q[j*W +: W];
    for (int b = 0; b < W; b++)
      if (byte_q == 6'(b)) b_rdata = row_q[b*8 +: 8];
  end

endmodule
