// controller: central control unit of a core.
//
// One state machine covers the four phases the paper describes.
//
// Configuration (highest priority, checked whenever the core is idle in
// WAIT): an SPI memory request moves to one of six one-cycle access states
// (W_NEUR, R_NEUR, FF_W_SYN, FF_R_SYN, REC_W_SYN, REC_R_SYN), which performs
// the byte access on the CNU and acknowledges the SPI slave, then to
// WAIT_SPIDN, which returns a read byte and goes back to WAIT once no request
// is pending.
//
// Spike integration: an ASPL packet at the head of the feedforward queue
// starts FF_INTEG, which sweeps neurons 0..NeuronNumber-1, each in two cycles
// (read state and weight, then write back state + weight); POP then removes
// the packet. An EOTS/EOIN packet first drains the recurrent queue when the
// layer is recurrent: REC_INTEG_T (ATA-T) sweeps all neurons for every ASCL
// with the recurrent weights, REC_INTEG_F (ATA-F) updates only the source
// neuron with the self-weight register.
//
// Leakage / spike generation: LEAK_SPK sweeps all neurons with the threshold,
// reset and leak operation. A neuron that fires produces an ASPL for the next
// layer and, in recurrent layers, an ASCL pushed on the local queue; the
// controller waits in WAIT_TRANS until AER-OUT confirms the transfer, then
// resumes the sweep. After the last neuron it sends EOTS, or EOIN at the last
// step of a sample, waits for its transfer, pops the control packet and
// returns to WAIT. At the last step every neuron's state is written as zero
// (lazy reset) and no ASCL is queued, so the next sample starts clean.
//
// The last step of a sample is the one started by an EOIN packet or, when
// the TIME STEP register is non-zero, the TIME STEP-th step since the last
// EOIN (this combination is this design's reading of the paper).
// The state names and transitions follow the paper's two controller figures;
// the two-cycle neuron access and the handshakes are this design's choice.
module controller
  import flexi_pkg::*;
#(
  parameter int N         = 128,
  parameter bit RECURRENT = 1'b0,   // recurrent queue built
  parameter bit REC_MEM   = 1'b0    // recurrent synaptic memory built (ATA-T)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  // SPI memory access unit
  input  logic        mem_req,
  input  logic        mem_we,
  input  mem_target_e mem_target,
  input  logic [18:0] mem_addr,
  input  logic [7:0]  mem_wdata,
  output logic        mem_ack,
  output logic [7:0]  mem_rdata,
  output logic        mem_rvalid,
  // scheduler
  input  logic        ff_valid,
  input  pkt_t        ff_data,
  output logic        ff_pop,
  output logic        rec_push,
  output naddr_t      rec_wdata,
  input  logic        rec_valid,
  input  naddr_t      rec_data,
  output logic        rec_pop,
  // AER-OUT
  output logic        tx_valid,
  output pkt_t        tx_data,
  input  logic        tx_ready,
  // CNU compute port
  output logic        cnu_rd,
  output logic        cnu_wb,
  output cnu_op_e     cnu_op,
  output logic        cnu_rec_sel,
  output naddr_t      cnu_src,
  output naddr_t      cnu_dst,
  output logic        cnu_lazy_reset,
  input  logic        cnu_spike,
  // CNU SPI byte port
  output logic        b_en,
  output logic        b_we,
  output mem_target_e b_target,
  output logic [18:0] b_addr,
  output logic [7:0]  b_wdata,
  input  logic [7:0]  b_rdata
);

  typedef enum logic [3:0] {
    S_WAIT, S_W_NEUR, S_R_NEUR, S_FF_W_SYN, S_FF_R_SYN, S_REC_W_SYN,
    S_REC_R_SYN, S_WAIT_SPIDN, S_FF_INTEG, S_POP, S_REC_INTEG_T,
    S_REC_INTEG_F, S_LEAK_SPK, S_WAIT_TRANS
  } state_e;

  state_e      state;
  logic        phase;        // 0: read cycle, 1: write-back cycle
  logic [8:0]  n;            // neuron being processed
  naddr_t      src;          // ASPL source address
  logic        final_step;   // current step ends the sample
  logic [15:0] ts_cnt;
  pkt_t        out_pkt;
  logic        rd_pending;

  logic [8:0]  last_n;
  logic        is_last, rec_rt, ata_t_rt, next_final;

  assign last_n   = (cfg.neuron_number == '0 || cfg.neuron_number > 9'(N))
                    ? 9'(N - 1) : cfg.neuron_number - 9'd1;
  assign is_last  = (n == last_n);
  assign rec_rt   = RECURRENT && cfg.recurrent;
  assign ata_t_rt = REC_MEM && cfg.all_to_all;
  assign next_final = (ff_data == PKT_EOIN) ||
                      (cfg.time_step != '0 && ts_cnt == cfg.time_step - 16'd1);

  // ---------------------------------------------------------------- outputs
  always_comb begin
    mem_ack        = 1'b0;
    mem_rvalid     = 1'b0;
    mem_rdata      = b_rdata;
    ff_pop         = 1'b0;
    rec_push       = 1'b0;
    rec_wdata      = naddr_t'(n);
    rec_pop        = 1'b0;
    tx_valid       = 1'b0;
    tx_data        = out_pkt;
    cnu_rd         = 1'b0;
    cnu_wb         = 1'b0;
    cnu_op         = OP_NONE;
    cnu_rec_sel    = 1'b0;
    cnu_src        = src;
    cnu_dst        = naddr_t'(n);
    cnu_lazy_reset = 1'b0;
    b_en           = 1'b0;
    b_we           = 1'b0;
    b_target       = mem_target;
    b_addr         = mem_addr;
    b_wdata        = mem_wdata;
    unique case (state)
      S_W_NEUR, S_FF_W_SYN, S_REC_W_SYN: begin
        b_en = 1'b1; b_we = 1'b1; mem_ack = 1'b1;
      end
      S_R_NEUR, S_FF_R_SYN, S_REC_R_SYN: begin
        b_en = 1'b1; mem_ack = 1'b1;
      end
      S_WAIT_SPIDN: mem_rvalid = rd_pending;
      S_FF_INTEG: begin
        cnu_rd = !phase;
        cnu_wb = phase;
        cnu_op = OP_INTEG;
      end
      S_POP: ff_pop = 1'b1;
      S_REC_INTEG_T: if (rec_valid) begin
        cnu_src     = rec_data;
        cnu_rec_sel = 1'b1;
        cnu_rd      = !phase;
        cnu_wb      = phase;
        cnu_op      = OP_INTEG;
        rec_pop     = phase && is_last;
      end
      S_REC_INTEG_F: if (rec_valid) begin
        cnu_src = rec_data;
        cnu_dst = rec_data;
        cnu_rd  = !phase;
        cnu_wb  = phase;
        cnu_op  = OP_INTEG_SELF;
        rec_pop = phase;
      end
      S_LEAK_SPK: begin
        cnu_rd         = !phase;
        cnu_wb         = phase;
        cnu_op         = OP_LEAK;
        cnu_lazy_reset = final_step;
        rec_push       = phase && cnu_spike && rec_rt && !final_step;
      end
      S_WAIT_TRANS: begin
        tx_valid = 1'b1;
        ff_pop   = tx_ready && pkt_is_ctrl(out_pkt);
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------ next state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_WAIT;
      phase      <= 1'b0;
      n          <= '0;
      src        <= '0;
      final_step <= 1'b0;
      ts_cnt     <= '0;
      out_pkt    <= '0;
      rd_pending <= 1'b0;
    end else begin
      unique case (state)
        S_WAIT: begin
          phase <= 1'b0;
          n     <= '0;
          if (mem_req) begin
            unique case ({mem_we, mem_target})
              {1'b1, MEM_NEUR}:    state <= S_W_NEUR;
              {1'b0, MEM_NEUR}:    state <= S_R_NEUR;
              {1'b1, MEM_FF_SYN}:  state <= S_FF_W_SYN;
              {1'b0, MEM_FF_SYN}:  state <= S_FF_R_SYN;
              {1'b1, MEM_REC_SYN}: state <= S_REC_W_SYN;
              default:             state <= S_REC_R_SYN;
            endcase
          end else if (cfg.activity_en && ff_valid) begin
            if (!pkt_is_ctrl(ff_data)) begin
              src   <= ff_data[ADDR_W-1:0];
              state <= S_FF_INTEG;
            end else begin
              final_step <= next_final;
              if (!rec_rt)       state <= S_LEAK_SPK;
              else if (ata_t_rt) state <= S_REC_INTEG_T;
              else               state <= S_REC_INTEG_F;
            end
          end
        end
        S_W_NEUR, S_FF_W_SYN, S_REC_W_SYN: begin
          rd_pending <= 1'b0;
          state      <= S_WAIT_SPIDN;
        end
        S_R_NEUR, S_FF_R_SYN, S_REC_R_SYN: begin
          rd_pending <= 1'b1;
          state      <= S_WAIT_SPIDN;
        end
        S_WAIT_SPIDN: begin
          rd_pending <= 1'b0;
          if (!mem_req) state <= S_WAIT;
        end
        S_FF_INTEG: begin
          phase <= !phase;
          if (phase) begin
            if (is_last) state <= S_POP;
            else         n <= n + 9'd1;
          end
        end
        S_POP: state <= S_WAIT;
        S_REC_INTEG_T: begin
          if (!rec_valid && !phase) begin
            n     <= '0;
            state <= S_LEAK_SPK;
          end else begin
            phase <= !phase;
            if (phase) n <= is_last ? '0 : n + 9'd1;
          end
        end
        S_REC_INTEG_F: begin
          if (!rec_valid && !phase) begin
            n     <= '0;
            state <= S_LEAK_SPK;
          end else begin
            phase <= !phase;
          end
        end
        S_LEAK_SPK: begin
          phase <= !phase;
          if (phase) begin
            if (cnu_spike) begin
              out_pkt <= make_aspl(naddr_t'(n));
              state   <= S_WAIT_TRANS;
            end else if (is_last) begin
              out_pkt <= final_step ? PKT_EOIN : PKT_EOTS;
              state   <= S_WAIT_TRANS;
            end else begin
              n <= n + 9'd1;
            end
          end
        end
        S_WAIT_TRANS: begin
          if (tx_ready) begin
            if (pkt_is_ctrl(out_pkt)) begin
              ts_cnt <= final_step ? '0 : ts_cnt + 16'd1;
              state  <= S_WAIT;
            end else if (is_last) begin
              out_pkt <= final_step ? PKT_EOIN : PKT_EOTS;
            end else begin
              n     <= n + 9'd1;
              phase <= 1'b0;
              state <= S_LEAK_SPK;
            end
          end
        end
        default: state <= S_WAIT;
      endcase
    end
  end

  a_one_access: assert property (@(posedge clk) disable iff (!rst_n) !(b_en && (cnu_rd || cnu_wb)));

endmodule
