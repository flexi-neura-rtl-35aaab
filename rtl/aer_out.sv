// aer_out: AER transmitter of a core.
//
// The controller offers a packet with valid and holds it until ready; ready
// is high for one cycle when the next layer has acknowledged the packet, so
// the controller knows the transfer is complete ("confirm transmission"). On
// the link side it runs the four-phase handshake that aer_in expects: raise
// aer_req with aer_data, wait for aer_ack, drop aer_req, wait for aer_ack to
// drop. Transmission by handshake is the paper's; the four-phase protocol and
// the valid/ready side are this design's choice.
module aer_out
  import flexi_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic valid,
  input  pkt_t data,
  output logic ready,
  output logic aer_req,
  output pkt_t aer_data,
  input  logic aer_ack
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DROP} state_e;
  state_e state;

  assign ready = (state == S_REQ) && aer_ack;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      aer_req  <= 1'b0;
      aer_data <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (valid && !aer_ack) begin
          aer_data <= data;
          aer_req  <= 1'b1;
          state    <= S_REQ;
        end
        S_REQ: if (aer_ack) begin
          aer_req <= 1'b0;
          state   <= S_DROP;
        end
        S_DROP: if (!aer_ack) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    aer_req && !aer_ack |=> aer_req && $stable(aer_data));

endmodule
