// config_regs: the twelve run-time configuration registers of a core.
//
// Written by SPI configuration frames (command bit 22 = 0): wr_idx is the
// register index from the command payload, wr_data the 23-bit data field.
// The registers are write-only from the bus. Their names and destinations
// follow the paper (core number, activity enable, neuron number, feedforward/
// recurrent, neuron model, time step, all-to-all, ATA-F weight, threshold,
// reset mechanism, beta rate, alpha rate); the index order, field widths and
// reset values are this design's choice (see flexi_pkg).
//
// Core selection: every core accepts a write to the core-number register;
// afterwards only the core whose CORE_ID equals that register (active = 1)
// accepts the other registers and memory accesses. Writes take effect on the
// clock edge where wr_en is high.
module config_regs
  import flexi_pkg::*;
#(
  parameter logic [7:0] CORE_ID      = 8'd0,
  parameter int         N            = 128,
  parameter bit         DEF_RECURRENT = 1'b0,
  parameter bit         DEF_ATA_T     = 1'b0,
  parameter bit         DEF_SYNAPTIC  = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [18:0] wr_idx,
  input  logic [22:0] wr_data,
  output cfg_t        cfg,
  output logic        active
);

  assign active = (cfg.core_number == CORE_ID);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg               <= '0;
      cfg.neuron_number <= 9'(N);
      cfg.recurrent     <= DEF_RECURRENT;
      cfg.all_to_all    <= DEF_ATA_T;
      cfg.synaptic      <= DEF_SYNAPTIC;
      cfg.beta_rate     <= 9'h100;   // no decay until programmed
      cfg.alpha_rate    <= 9'h100;
    end else if (wr_en && (wr_idx[18:4] == '0)) begin
      if (cfg_reg_e'(wr_idx[3:0]) == REG_CORE_NUMBER)
        cfg.core_number <= wr_data[7:0];
      else if (active) begin
        unique case (cfg_reg_e'(wr_idx[3:0]))
          REG_ACTIVITY_EN:   cfg.activity_en   <= wr_data[0];
          REG_NEURON_NUMBER: cfg.neuron_number <= wr_data[8:0];
          REG_FF_RECURRENT:  cfg.recurrent     <= wr_data[0];
          REG_NEURON_MODEL:  cfg.synaptic      <= wr_data[0];
          REG_TIME_STEP:     cfg.time_step     <= wr_data[15:0];
          REG_ALL_TO_ALL:    cfg.all_to_all    <= wr_data[0];
          REG_ATAF_WEIGHT:   cfg.ataf_weight   <= wr_data[15:0];
          REG_THRESHOLD:     cfg.threshold     <= wr_data[15:0];
          REG_RESET_MECH:    cfg.reset_sub     <= wr_data[0];
          REG_BETA_RATE:     cfg.beta_rate     <= wr_data[8:0];
          REG_ALPHA_RATE:    cfg.alpha_rate    <= wr_data[8:0];
          default: ;
        endcase
      end
    end
  end

endmodule
