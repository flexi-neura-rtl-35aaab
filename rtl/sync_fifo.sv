// sync_fifo: single-clock first-in first-out queue (helper of the scheduler).
//
// Show-ahead: rd_data is the oldest entry whenever empty is low; pop removes
// it. push is ignored when full, pop when empty (the users never do either;
// assertions flag it in simulation). DEPTH must be a power of two. Storage is
// a register array with read and write pointers one bit wider than the index.
//
// Interface: push/wr_data, pop/rd_data, empty, full; clear empties it.
// Timing: a pushed entry is visible at rd_data in the next cycle. The
// scheduler's queues are FIFOs in the published design; this implementation
// of them is this design's.
module sync_fifo #(
  parameter int WIDTH = 9,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [1 << AW];
  logic [AW:0]      wp, rp;

  assign empty   = (wp == rp);
  assign full    = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (clear) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (push && !full) mem[wp[AW-1:0]] <= wr_data;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
