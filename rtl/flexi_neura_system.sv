// flexi_neura_system: multi-core Flexi-NeurA network.
//
// NUM_CORES cores in a chain, one per hidden or output layer; LAYERS[0] is
// the size of the input layer (kept by the host), LAYERS[i+1] the size of the
// layer held by core i. Core i's AER output link feeds core i+1's AER input
// link; the first core's input and the last core's output are the system's
// AER ports, to which the host connects (it injects the input spikes with
// EOTS/EOIN and collects the output spikes). All cores share one SPI bus
// (SCK, CS_N, MOSI); core i has the ID i+1 and takes part in a transfer only
// after the host has written that ID to the core-number register of all
// cores. MISO is the OR of the cores' outputs, each gated by its drive
// enable, so only the selected core answers.
//
// Defaults are the paper's main configuration: the 256-128-10 fully
// connected LIF network for MNIST on two cores, 6-bit weights and 8-bit
// membrane potentials. Per-core settings are given as arrays (index = core).
module flexi_neura_system
  import flexi_pkg::*;
#(
  parameter int             NUM_CORES = 2,
  parameter int             LAYERS    [NUM_CORES+1] = '{256, 128, 10},
  parameter int             W_FF      [NUM_CORES]   = '{6, 6},
  parameter int             W_REC     [NUM_CORES]   = '{6, 6},
  parameter int             V_W       [NUM_CORES]   = '{8, 8},
  parameter int             I_W       [NUM_CORES]   = '{8, 8},
  parameter bit [NUM_CORES-1:0] RECURRENT = '0,
  parameter bit [NUM_CORES-1:0] ATA_T     = '0,
  parameter bit [NUM_CORES-1:0] SYNAPTIC  = '0,
  parameter int             FF_DEPTH  = 16
) (
  input  logic clk,
  input  logic rst_n,
  // SPI bus from the host
  input  logic spi_sck,
  input  logic spi_cs_n,
  input  logic spi_mosi,
  output logic spi_miso,
  // AER link from the host (input layer)
  input  logic aer_in_req,
  input  pkt_t aer_in_data,
  output logic aer_in_ack,
  // AER link to the host (output layer)
  output logic aer_out_req,
  output pkt_t aer_out_data,
  input  logic aer_out_ack
);

  logic                 req  [NUM_CORES+1];
  pkt_t                 data [NUM_CORES+1];
  logic                 ack  [NUM_CORES+1];
  logic [NUM_CORES-1:0] miso, miso_oe;

  assign req[0]       = aer_in_req;
  assign data[0]      = aer_in_data;
  assign aer_in_ack   = ack[0];
  assign aer_out_req  = req[NUM_CORES];
  assign aer_out_data = data[NUM_CORES];
  assign ack[NUM_CORES] = aer_out_ack;

  for (genvar i = 0; i < NUM_CORES; i++) begin : g_core
    flexi_neura_core #(
      .CORE_ID(8'(i + 1)), .N_PREV(LAYERS[i]), .N(LAYERS[i+1]),
      .W_FF(W_FF[i]), .W_REC(W_REC[i]), .V_W(V_W[i]), .I_W(I_W[i]),
      .RECURRENT(RECURRENT[i]), .ATA_T(ATA_T[i]), .SYNAPTIC(SYNAPTIC[i]),
      .FF_DEPTH(FF_DEPTH)
    ) u_core (
      .clk, .rst_n, .sck(spi_sck), .cs_n(spi_cs_n), .mosi(spi_mosi),
      .miso(miso[i]), .miso_oe(miso_oe[i]),
      .in_req(req[i]), .in_data(data[i]), .in_ack(ack[i]),
      .out_req(req[i+1]), .out_data(data[i+1]), .out_ack(ack[i+1]));
  end

  assign spi_miso = |(miso & miso_oe);

endmodule
