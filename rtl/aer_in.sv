// aer_in: AER receiver of a core.
//
// Four-phase request/acknowledge handshake with the AER-OUT of the previous
// layer (or the host): the sender puts a 9-bit packet on aer_data and raises
// aer_req; when the feedforward queue has space, the packet is pushed and
// aer_ack is raised; the sender then drops aer_req and aer_ack drops in turn.
// The queue is never written when full, so no packet is lost; the sender is
// simply held off (backpressure). Handshake-based reception gated by queue
// space is the paper's; the four-phase protocol is this design's choice.
// All sides share one clock.
module aer_in
  import flexi_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic aer_req,
  input  pkt_t aer_data,
  output logic aer_ack,
  output logic push,
  output pkt_t push_data,
  input  logic fifo_full
);

  assign push      = aer_req && !aer_ack && !fifo_full;
  assign push_data = aer_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   aer_ack <= 1'b0;
    else if (push)                aer_ack <= 1'b1;
    else if (aer_ack && !aer_req) aer_ack <= 1'b0;
  end

endmodule
