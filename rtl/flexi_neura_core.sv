// flexi_neura_core: one Flexi-NeurA processing core (one network layer).
//
// Four units, as in the paper's core diagram: the SPI slave (memory access
// unit and configuration registers), the controller, the Configurable Neuron
// Unit (synaptic memories, neuron state memory, neuron core) and the AER
// Management Unit (AER-IN, scheduler queues, AER-OUT).
//
// Design-time parameters choose what is built: layer sizes (N_PREV source
// neurons, N neurons), weight/potential/current widths, whether the layer can
// be recurrent (RECURRENT: ASCL queue and ATA-F path), whether the recurrent
// weight memory for ATA-T is built (ATA_T), whether the synaptic neuron model
// is built (SYNAPTIC; IF and LIF always are) and which coefficient-generator
// shift units exist. Run-time registers, written over SPI, then select among
// what was built.
//
// Interfaces: SPI (sck, cs_n, mosi, miso with miso_oe: the core drives MISO
// only while answering a read), AER input link from the previous layer and
// AER output link to the next (9-bit packets, four-phase req/ack, see aer_in
// and aer_out). One clock, asynchronous active-low reset.
// Latency: an ASPL costs 2*NeuronNumber+2 cycles, a time step's leak/spike
// sweep 2*NeuronNumber cycles plus the packet transfers.
module flexi_neura_core
  import flexi_pkg::*;
#(
  parameter logic [7:0] CORE_ID   = 8'd1,
  parameter int         N_PREV    = 256,
  parameter int         N         = 128,
  parameter int         W_FF      = 6,
  parameter int         W_REC     = 6,
  parameter int         V_W       = 8,
  parameter int         I_W       = 8,
  parameter bit         RECURRENT = 1'b0,
  parameter bit         ATA_T     = 1'b0,
  parameter bit         SYNAPTIC  = 1'b0,
  parameter logic [3:0] SEL_BETA  = 4'b1111,
  parameter logic [3:0] SEL_ALPHA = 4'b1111,
  parameter int         FF_DEPTH  = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sck,
  input  logic cs_n,
  input  logic mosi,
  output logic miso,
  output logic miso_oe,
  input  logic in_req,
  input  pkt_t in_data,
  output logic in_ack,
  output logic out_req,
  output pkt_t out_data,
  input  logic out_ack
);

  localparam bit REC_MEM = RECURRENT && ATA_T;

  initial begin
    assert (N >= 1 && N <= MAX_NEURONS && N_PREV >= 1 && N_PREV <= MAX_NEURONS)
      else $error("layer sizes must be 1..%0d", MAX_NEURONS);
  end

  cfg_t        cfg;
  logic        mem_req, mem_we, mem_ack, mem_rvalid;
  mem_target_e mem_target;
  logic [18:0] mem_addr;
  logic [7:0]  mem_wdata, mem_rdata;
  logic        ff_valid, ff_pop, rec_push, rec_valid, rec_pop;
  pkt_t        ff_data, tx_data;
  naddr_t      rec_wdata, rec_data;
  logic        tx_valid, tx_ready;
  logic        cnu_rd, cnu_wb, cnu_rec_sel, cnu_lazy_reset, cnu_spike;
  cnu_op_e     cnu_op;
  naddr_t      cnu_src, cnu_dst;
  logic        b_en, b_we;
  mem_target_e b_target;
  logic [18:0] b_addr;
  logic [7:0]  b_wdata, b_rdata;

  spi_slave #(.CORE_ID(CORE_ID), .N(N), .DEF_RECURRENT(RECURRENT),
              .DEF_ATA_T(REC_MEM), .DEF_SYNAPTIC(SYNAPTIC)) u_spi (
    .clk, .rst_n, .sck, .cs_n, .mosi, .miso, .miso_oe,
    .mem_req, .mem_we, .mem_target, .mem_addr, .mem_wdata,
    .mem_ack, .mem_rdata, .mem_rvalid, .cfg);

  controller #(.N(N), .RECURRENT(RECURRENT), .REC_MEM(REC_MEM)) u_ctrl (
    .clk, .rst_n, .cfg,
    .mem_req, .mem_we, .mem_target, .mem_addr, .mem_wdata,
    .mem_ack, .mem_rdata, .mem_rvalid,
    .ff_valid, .ff_data, .ff_pop, .rec_push, .rec_wdata, .rec_valid,
    .rec_data, .rec_pop, .tx_valid, .tx_data, .tx_ready,
    .cnu_rd, .cnu_wb, .cnu_op, .cnu_rec_sel, .cnu_src, .cnu_dst,
    .cnu_lazy_reset, .cnu_spike,
    .b_en, .b_we, .b_target, .b_addr, .b_wdata, .b_rdata);

  cnu #(.N_PREV(N_PREV), .N(N), .W_FF(W_FF), .W_REC(W_REC), .V_W(V_W),
        .I_W(I_W), .REC_MEM(REC_MEM), .SYNAPTIC(SYNAPTIC),
        .SEL_BETA(SEL_BETA), .SEL_ALPHA(SEL_ALPHA)) u_cnu (
    .clk, .cfg, .rd(cnu_rd), .wb(cnu_wb), .op(cnu_op), .rec_sel(cnu_rec_sel),
    .src(cnu_src), .dst(cnu_dst), .lazy_reset(cnu_lazy_reset),
    .spike(cnu_spike), .b_en, .b_we, .b_target, .b_addr, .b_wdata, .b_rdata);

  amu #(.FF_DEPTH(FF_DEPTH), .N(N), .RECURRENT(RECURRENT)) u_amu (
    .clk, .rst_n, .in_req, .in_data, .in_ack, .out_req, .out_data, .out_ack,
    .ff_valid, .ff_data, .ff_pop, .rec_push, .rec_wdata, .rec_valid,
    .rec_data, .rec_pop, .tx_valid, .tx_data, .tx_ready);

endmodule
