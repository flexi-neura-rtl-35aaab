// amu: AER Management Unit of a core.
//
// AER-IN, the scheduler (feedforward queue and, for recurrent layers, the
// ASCL queue) and AER-OUT, wired as in the paper's core diagram: AER-IN feeds
// the feedforward queue, the controller reads both queues, pushes ASCL
// packets, and hands outgoing packets to AER-OUT.
//
// Interface: the two AER links (req/data/ack), the feedforward queue head
// (ff_valid/ff_data/ff_pop), the ASCL queue (rec_push/rec_data/rec_pop) and
// the outgoing packet port (tx_valid/tx_data/tx_ready). Timing: a packet
// acknowledged on AER-IN is at the queue head one cycle later; tx_ready pulses
// when the next layer acknowledges. The three submodules are the published
// ones; these internal interfaces are this design's.
module amu
  import flexi_pkg::*;
#(
  parameter int FF_DEPTH  = 16,
  parameter int N         = 128,
  parameter bit RECURRENT = 1'b0
) (
  input  logic   clk,
  input  logic   rst_n,
  // link from the previous layer
  input  logic   in_req,
  input  pkt_t   in_data,
  output logic   in_ack,
  // link to the next layer
  output logic   out_req,
  output pkt_t   out_data,
  input  logic   out_ack,
  // controller side
  output logic   ff_valid,
  output pkt_t   ff_data,
  input  logic   ff_pop,
  input  logic   rec_push,
  input  naddr_t rec_wdata,
  output logic   rec_valid,
  output naddr_t rec_data,
  input  logic   rec_pop,
  input  logic   tx_valid,
  input  pkt_t   tx_data,
  output logic   tx_ready
);

  logic push, full;
  pkt_t push_data;

  aer_in u_aer_in (
    .clk, .rst_n, .aer_req(in_req), .aer_data(in_data), .aer_ack(in_ack),
    .push, .push_data, .fifo_full(full));

  scheduler #(.FF_DEPTH(FF_DEPTH), .N(N), .RECURRENT(RECURRENT)) u_sched (
    .clk, .rst_n, .ff_push(push), .ff_wdata(push_data), .ff_full(full),
    .ff_valid, .ff_data, .ff_pop, .rec_push, .rec_wdata, .rec_valid,
    .rec_data, .rec_pop);

  aer_out u_aer_out (
    .clk, .rst_n, .valid(tx_valid), .data(tx_data), .ready(tx_ready),
    .aer_req(out_req), .aer_data(out_data), .aer_ack(out_ack));

endmodule
