// scheduler: the event queues of a core.
//
// Feedforward queue: packets from AER-IN (ASPL, EOTS, EOIN), delivered to the
// controller in arrival order. Recurrent queue: ASCL packets (8-bit addresses
// of neurons of this layer that fired), generated by the controller during
// spike generation and consumed in the next time step's recurrent
// integration; built only when RECURRENT = 1. Both are FIFOs, as the paper
// describes; the feedforward depth is this design's choice, the recurrent
// depth holds one packet per neuron, the most one time step can produce.
// Show-ahead outputs: *_valid high means *_data is the head of the queue.
module scheduler
  import flexi_pkg::*;
#(
  parameter int FF_DEPTH  = 16,
  parameter int N         = 128,
  parameter bit RECURRENT = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  // from AER-IN
  input  logic   ff_push,
  input  pkt_t   ff_wdata,
  output logic   ff_full,
  // to the controller
  output logic   ff_valid,
  output pkt_t   ff_data,
  input  logic   ff_pop,
  input  logic   rec_push,
  input  naddr_t rec_wdata,
  output logic   rec_valid,
  output naddr_t rec_data,
  input  logic   rec_pop
);

  localparam int REC_DEPTH = 1 << ((N > 1) ? $clog2(N) : 1);

  logic ff_empty;

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(FF_DEPTH)) u_ff_fifo (
    .clk, .rst_n, .clear(1'b0), .push(ff_push), .wr_data(ff_wdata),
    .pop(ff_pop), .rd_data(ff_data), .empty(ff_empty), .full(ff_full));
  assign ff_valid = !ff_empty;

  if (RECURRENT) begin : g_rec
    logic rec_empty, rec_full;
    sync_fifo #(.WIDTH(ADDR_W), .DEPTH(REC_DEPTH)) u_rec_fifo (
      .clk, .rst_n, .clear(1'b0), .push(rec_push), .wr_data(rec_wdata),
      .pop(rec_pop), .rd_data(rec_data), .empty(rec_empty), .full(rec_full));
    assign rec_valid = !rec_empty;
  end else begin : g_no_rec
    assign rec_valid = 1'b0;
    assign rec_data  = '0;
  end

endmodule
