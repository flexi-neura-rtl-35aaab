// cnu: Configurable Neuron Unit of one core.
//
// Holds the feedforward synaptic memory, the recurrent synaptic memory (built
// only for ATA-T layers, REC_MEM = 1), the neuron state memory and the neuron
// core. The controller drives it one neuron at a time in two cycles:
//   rd cycle: read the destination neuron's state row and the weight rows
//             (feedforward row {src, dst/8}, recurrent row {src, dst/8});
//   wb cycle: the neuron core combines state and weight according to op
//             (rec_sel picks the recurrent weight, OP_INTEG_SELF the ATA-F
//             self weight register) and the new state is written back to row
//             dst; spike is valid in this cycle for OP_LEAK.
// src and dst must stay stable over both cycles.
//
// SPI byte access (b_*) reaches any of the three memories; a read returns its
// byte on b_rdata one cycle after b_en. The byte port and the compute port are
// never used in the same cycle (the controller serialises them).
// The three-memory/neuron-core structure is the paper's; the two-cycle access
// sequence is this design's choice.
module cnu
  import flexi_pkg::*;
#(
  parameter int         N_PREV    = 256,
  parameter int         N         = 128,
  parameter int         W_FF      = 6,
  parameter int         W_REC     = 6,
  parameter int         V_W       = 8,
  parameter int         I_W       = 8,
  parameter bit         REC_MEM   = 1'b0,
  parameter bit         SYNAPTIC  = 1'b0,
  parameter logic [3:0] SEL_BETA  = 4'b1111,
  parameter logic [3:0] SEL_ALPHA = 4'b1111
) (
  input  logic        clk,
  input  cfg_t        cfg,
  // compute port
  input  logic        rd,
  input  logic        wb,
  input  cnu_op_e     op,
  input  logic        rec_sel,
  input  naddr_t      src,
  input  naddr_t      dst,
  input  logic        lazy_reset,
  output logic        spike,
  // SPI byte port
  input  logic        b_en,
  input  logic        b_we,
  input  mem_target_e b_target,
  input  logic [18:0] b_addr,     // SPI payload, decoded per target
  input  logic [7:0]  b_wdata,
  output logic [7:0]  b_rdata
);

  logic signed [W_FF-1:0]  w_ff;
  logic signed [W_REC-1:0] w_rec;
  logic signed [15:0]      w_sel;
  logic signed [V_W-1:0]   vm_q, vm_d;
  logic signed [I_W-1:0]   is_q, is_d;
  logic [7:0]              rd_ff, rd_rec, rd_neur;
  mem_target_e             tgt_q;
  logic                    en_neur, en_ff, en_rec;

  assign en_neur = b_en && (b_target == MEM_NEUR);
  assign en_ff   = b_en && (b_target == MEM_FF_SYN);
  assign en_rec  = b_en && (b_target == MEM_REC_SYN);

  // Synaptic payload: [12:0] row index, [18:13] byte offset.
  syn_mem #(.N_SRC(N_PREV), .N_DST(N), .W(W_FF)) u_ff_mem (
    .clk, .rd_en(rd), .src, .dst, .weight(w_ff),
    .b_en(en_ff), .b_we, .b_row(b_addr[12:0]), .b_byte(b_addr[18:13]),
    .b_wdata, .b_rdata(rd_ff));

  if (REC_MEM) begin : g_rec_mem
    syn_mem #(.N_SRC(N), .N_DST(N), .W(W_REC)) u_rec_mem (
      .clk, .rd_en(rd), .src, .dst, .weight(w_rec),
      .b_en(en_rec), .b_we, .b_row(b_addr[12:0]), .b_byte(b_addr[18:13]),
      .b_wdata, .b_rdata(rd_rec));
  end else begin : g_no_rec_mem
    assign w_rec  = '0;
    assign rd_rec = '0;
  end

  // Neuron payload: [7:0] neuron row, [18:8] byte offset.
  neuron_mem #(.N(N), .V_W(V_W), .I_W(I_W), .SYNAPTIC(SYNAPTIC)) u_neur_mem (
    .clk, .rd_en(rd), .we(wb), .addr(dst), .vm_d, .isyn_d(is_d),
    .vm_q, .isyn_q(is_q),
    .b_en(en_neur), .b_we, .b_row(b_addr[7:0]), .b_byte(b_addr[18:8]),
    .b_wdata, .b_rdata(rd_neur));

  always_comb begin
    if (op == OP_INTEG_SELF) w_sel = cfg.ataf_weight;
    else if (rec_sel)        w_sel = 16'(w_rec);
    else                     w_sel = 16'(w_ff);
  end

  neuron_core #(.V_W(V_W), .I_W(I_W), .W_W(16), .SYNAPTIC(SYNAPTIC),
                .SEL_BETA(SEL_BETA), .SEL_ALPHA(SEL_ALPHA)) u_core (
    .op(wb ? op : OP_NONE), .syn_mode(cfg.synaptic), .weight(w_sel),
    .vm_in(vm_q), .isyn_in(is_q), .threshold(cfg.threshold),
    .reset_sub(cfg.reset_sub), .beta_rate(cfg.beta_rate),
    .alpha_rate(cfg.alpha_rate), .lazy_reset, .vm_out(vm_d),
    .isyn_out(is_d), .spike);

  always_ff @(posedge clk)
    if (b_en) tgt_q <= b_target;

  always_comb begin
    unique case (tgt_q)
      MEM_FF_SYN:  b_rdata = rd_ff;
      MEM_REC_SYN: b_rdata = rd_rec;
      default:     b_rdata = rd_neur;
    endcase
  end

endmodule
