// neuron_mem: neuron state memory of one core.
//
// One row per neuron, the row count rounded up to a power of two. A row holds
// the neuron's state variables: the membrane potential Vm (V_W bits, in the
// low bits) and, when the synaptic model is built, the synaptic current Isyn
// (I_W bits, above Vm). The row width is rounded up to whole bytes, so that
// SPI can read and write it byte by byte. Sizes and rounding follow the
// paper; the field placement is this design's choice.
//
// Single-port synchronous RAM with read data one cycle after the request.
//   - compute: rd_en reads row addr (vm_q/isyn_q next cycle); we writes the
//     whole row from vm_d/isyn_d;
//   - SPI: b_en with a row and byte offset, byte write or byte read (b_rdata
//     next cycle). Byte access wins over compute access.
module neuron_mem
  import flexi_pkg::*;
#(
  parameter int N        = 128,
  parameter int V_W      = 8,
  parameter int I_W      = 8,
  parameter bit SYNAPTIC = 1'b0
) (
  input  logic                  clk,
  input  logic                  rd_en,
  input  logic                  we,
  input  naddr_t                addr,
  input  logic signed [V_W-1:0] vm_d,
  input  logic signed [I_W-1:0] isyn_d,
  output logic signed [V_W-1:0] vm_q,
  output logic signed [I_W-1:0] isyn_q,
  input  logic                  b_en,
  input  logic                  b_we,
  input  naddr_t                b_row,
  input  logic [10:0]           b_byte,
  input  logic [7:0]            b_wdata,
  output logic [7:0]            b_rdata
);

  localparam int STATE_BITS = V_W + (SYNAPTIC ? I_W : 0);
  localparam int BYTES      = (STATE_BITS + 7) / 8;
  localparam int RW         = 8 * BYTES;
  localparam int AW         = (N > 1) ? $clog2(N) : 1;
  localparam int DEPTH      = 1 << AW;

  logic [RW-1:0] mem [DEPTH];
  logic [RW-1:0] row_q, row_d;
  logic [10:0]   byte_q;
  logic [AW-1:0] a;

  assign a = b_en ? AW'(b_row) : AW'(addr);

  always_comb begin
    if (SYNAPTIC) row_d = RW'({isyn_d, vm_d});
    else          row_d = RW'({vm_d});
  end

  always_ff @(posedge clk) begin
    if (b_en && b_we) begin
      for (int b = 0; b < BYTES; b++)
        if (b_byte == 11'(b)) mem[a][b*8 +: 8] <= b_wdata;
    end else if (we && !b_en) begin
      mem[a] <= row_d;
    end else if (b_en || rd_en) begin
      row_q <= mem[a];
    end
    if (b_en) byte_q <= b_byte;
  end

  assign vm_q = row_q[V_W-1:0];
  if (SYNAPTIC) begin : g_isyn
    assign isyn_q = row_q[V_W +: I_W];
  end else begin : g_no_isyn
    assign isyn_q = '0;
  end

  always_comb begin
    b_rdata = '0;
    for (int b = 0; b < BYTES; b++)
      if (byte_q == 11'(b)) b_rdata = row_q[b*8 +: 8];
  end

endmodule
