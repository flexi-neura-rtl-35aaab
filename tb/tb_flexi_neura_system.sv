// tb_flexi_neura_system: end-to-end test of a reduced two-core network.
//
// Network 12-10-5: core 1 (10 neurons) is built with the recurrent ATA-T
// memory and the synaptic model, core 2 (5 neurons) with the recurrent queue
// (ATA-F only) and IF/LIF only, so that every run-time mode is reachable.
// Everything goes through the system pins: the host model programs both cores
// over the shared SPI bus (core selection by the core-number register), sends
// input spikes with EOTS/EOIN over the AER input link and checks every output
// packet of the second core, in order, against two chained reference layers.
//
// The run switches the configuration at run time between samples:
//   A  core 1 ATA-T synaptic, reset to zero; core 2 ATA-F LIF, reset by
//      subtraction; samples end with EOIN
//   B  both feedforward, core 1 LIF, core 2 IF; samples end by the TIME STEP
//      register (the host sends only EOTS)
//   C  core 1 ATA-F synaptic, core 2 feedforward LIF, slow host receiver
// Counters record how often each mechanism happened; a mechanism that never
// occurred counts as a failure. The end-to-end latency of one sample (host's
// first packet to the output EOIN) is printed for information.
module tb_flexi_neura_system;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int L0 = 12, L1 = 10, L2 = 5;
  localparam int WF1 = 5, WR1 = 4, WF2 = 5, WR2 = 4;
  localparam int VW1 = 8, IW1 = 7, VW2 = 9, IW2 = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sck, cs_n, mosi, miso;
  logic in_req = 0, in_ack, out_req, out_ack = 0;
  pkt_t in_data = '0, out_data;

  flexi_neura_system #(
    .NUM_CORES(2), .LAYERS('{L0, L1, L2}), .W_FF('{WF1, WF2}), .W_REC('{WR1, WR2}),
    .V_W('{VW1, VW2}), .I_W('{IW1, IW2}), .RECURRENT(2'b11), .ATA_T(2'b01),
    .SYNAPTIC(2'b01), .FF_DEPTH(8)
  ) dut (
    .clk, .rst_n, .spi_sck(sck), .spi_cs_n(cs_n), .spi_mosi(mosi), .spi_miso(miso),
    .aer_in_req(in_req), .aer_in_data(in_data), .aer_in_ack(in_ack),
    .aer_out_req(out_req), .aer_out_data(out_data), .aer_out_ack(out_ack));

  tb_spi_host #(.H(3)) host (.clk, .sck, .cs_n, .mosi, .miso);

  int checks = 0, failures = 0;
  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // ---------------- host AER sender and receiver ----------------
  pkt_t tx_q[$];
  pkt_t exp_q[$];
  int   slow_rx = 0;          // 0: fast receiver, 1: random long delays
  longint t_first_tx = -1, t_last_eoin = -1;

  initial forever begin
    @(negedge clk);
    if (tx_q.size() > 0) begin
      if (t_first_tx < 0) t_first_tx = $time / 10;
      in_data = tx_q.pop_front();
      in_req = 1;
      do @(negedge clk); while (!in_ack);
      in_req = 0;
      do @(negedge clk); while (in_ack);
    end
  end

  initial forever begin
    @(negedge clk);
    if (out_req) begin
      if (slow_rx) repeat ($urandom_range(0, 60)) @(negedge clk);
      if (exp_q.size() == 0) chk(out_data, 999, "unexpected output packet");
      else chk(out_data, exp_q.pop_front(), "output packet");
      if (out_data == PKT_EOIN) t_last_eoin = $time / 10;
      out_ack = 1;
      do @(negedge clk); while (out_req);
      out_ack = 0;
    end
  end

  // ---------------- mechanism counters ----------------
  int m_ff_integ, m_rec_t, m_rec_f, m_leak, m_spike, m_reset_zero, m_reset_sub;
  int m_lazy, m_tstep_end, m_eoin_end, m_if, m_lif, m_syn, m_stall_out, m_bp_full;
  int m_spi_rd, m_spi_wr, m_cfg_switch, m_sel_reject;

  for (genvar i = 0; i < 2; i++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      automatic int st = int'(dut.g_core[i].u_core.u_ctrl.state);
      automatic logic wb = dut.g_core[i].u_core.u_ctrl.cnu_wb;
      automatic cfg_t cf = dut.g_core[i].u_core.u_ctrl.cfg;
      if (wb && st == 8) m_ff_integ++;
      if (wb && st == 10) m_rec_t++;
      if (wb && st == 11) m_rec_f++;
      if (wb && st == 12) begin
        m_leak++;
        if (dut.g_core[i].u_core.u_ctrl.cnu_lazy_reset) m_lazy++;
        if (dut.g_core[i].u_core.u_ctrl.cnu_spike) begin
          m_spike++;
          if (cf.reset_sub) m_reset_sub++; else m_reset_zero++;
        end
        if (cf.synaptic) m_syn++;
        else if (cf.beta_rate == 9'h100) m_if++;
        else m_lif++;
      end
      if (st == 13 && !dut.g_core[i].u_core.u_ctrl.tx_ready) m_stall_out++;
      if (dut.g_core[i].u_core.in_req && !dut.g_core[i].u_core.in_ack
          && dut.g_core[i].u_core.u_amu.u_sched.ff_full) m_bp_full++;
      if (st == 2 || st == 4 || st == 6) m_spi_rd++;
      if (st == 1 || st == 3 || st == 5) m_spi_wr++;
    end
  end

  initial begin
    #20ms;
    $display("WATCHDOG timeout");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference network ----------------
  int w1[][], r1[][], w2[][], r2[][];
  int vm1[], is1[], vm2[], is2[];

  task automatic wait_outputs();
    int t = 0;
    while (exp_q.size() > 0 && t < 400000) begin @(negedge clk); t++; end
    chk(exp_q.size(), 0, "all expected packets received");
    repeat (20) @(negedge clk);
  endtask

  task automatic program_core(int id, layer_cfg_t c, int tstep);
    host.select_core(id);
    host.cfg_write(REG_ACTIVITY_EN, 1);
    host.cfg_write(REG_NEURON_NUMBER, c.n);
    host.cfg_write(REG_FF_RECURRENT, c.rec);
    host.cfg_write(REG_NEURON_MODEL, c.syn);
    host.cfg_write(REG_TIME_STEP, tstep);
    host.cfg_write(REG_ALL_TO_ALL, c.ata_t);
    host.cfg_write(REG_ATAF_WEIGHT, c.ataf_w & 16'hffff);
    host.cfg_write(REG_THRESHOLD, c.thr);
    host.cfg_write(REG_RESET_MECH, c.reset_sub);
    host.cfg_write(REG_BETA_RATE, c.beta);
    host.cfg_write(REG_ALPHA_RATE, c.alpha);
    m_cfg_switch++;
  endtask

  // Read core id's neuron j state over SPI (2 bytes) and compare.
  task automatic check_state(int id, int j, int vw, int iw, bit syn, int vm, int is, string what);
    logic [7:0] b0, b1;
    logic [15:0] row;
    host.select_core(id);
    host.mem_read(MEM_NEUR, {11'd0, 8'(j)}, b0);
    host.mem_read(MEM_NEUR, {11'd1, 8'(j)}, b1);
    row = {b1, b0};
    chk(sext(int'(row) & ((1 << vw) - 1), vw), vm, {what, " Vm"});
    if (syn) chk(sext(int'(row >> vw), iw), is, {what, " Isyn"});
  endtask

  task automatic run_sample(layer_cfg_t c1, layer_cfg_t c2, int nsteps, bit end_by_reg,
                            int p_spk, bit readback);
    int rin1[$], rin2[$], ro1[$], ro2[$], s1[$], s2[$], in_spk[$];
    rin1 = {}; rin2 = {};
    for (int s = 0; s < nsteps; s++) begin
      bit last = (s == nsteps - 1);
      in_spk = {};
      for (int k = 0; k < L0; k++) if ($urandom_range(0, 99) < p_spk) in_spk.push_back(k);
      foreach (in_spk[k]) tx_q.push_back(make_aspl(naddr_t'(in_spk[k])));
      tx_q.push_back((last && !end_by_reg) ? PKT_EOIN : PKT_EOTS);
      layer_step(c1, w1, r1, vm1, is1, in_spk, rin1, last, s1, ro1);
      layer_step(c2, w2, r2, vm2, is2, s1, rin2, last, s2, ro2);
      foreach (s2[k]) exp_q.push_back(make_aspl(naddr_t'(s2[k])));
      exp_q.push_back(last ? PKT_EOIN : PKT_EOTS);
      rin1 = ro1; rin2 = ro2;
      if (last) begin
        if (end_by_reg) m_tstep_end++; else m_eoin_end++;
      end
      if (readback && !last) begin
        wait_outputs();
        for (int j = 0; j < c1.n; j += 3)
          check_state(1, j, VW1, IW1, c1.syn, vm1[j], is1[j], "core 1 state");
        for (int j = 0; j < c2.n; j++)
          check_state(2, j, VW2, IW2, c2.syn, vm2[j], is2[j], "core 2 state");
      end
    end
    wait_outputs();
  endtask

  function automatic void rand_w(ref int w[][], input int ns, int nd, int lo, int hi);
    w = new[ns];
    foreach (w[s]) begin
      w[s] = new[nd];
      foreach (w[s][j]) w[s][j] = lo + int'($urandom_range(0, hi - lo));
    end
  endfunction

  layer_cfg_t c1, c2;
  bit used1[], used2[], used3[];

  initial begin
    longint lat;
    rand_w(w1, L0, L1, -6, 15);
    rand_w(r1, L1, L1, -8, 7);
    rand_w(w2, L1, L2, -5, 15);
    rand_w(r2, L2, L2, 0, 0);
    vm1 = new[L1]; is1 = new[L1]; vm2 = new[L2]; is2 = new[L2];
    used1 = new[L0]; used2 = new[L1]; used3 = new[L1];
    foreach (used1[k]) used1[k] = 1;
    foreach (used2[k]) used2[k] = 1;
    foreach (used3[k]) used3[k] = 1;

    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);

    // ---- load both cores; neuron states start at zero ----
    host.select_core(1);
    host.load_weights(MEM_FF_SYN, w1, L0, L1, WF1, used1);
    host.load_weights(MEM_REC_SYN, r1, L1, L1, WR1, used2);
    host.clear_states(L1, 2);
    host.select_core(2);
    host.load_weights(MEM_FF_SYN, w2, L1, L2, WF2, used3);
    host.clear_states(L2, 2);

    // core selection: a threshold written while core 2 is selected must not
    // reach core 1
    host.cfg_write(REG_THRESHOLD, 77);
    chk(dut.g_core[0].u_core.u_ctrl.cfg.threshold == 16'sd77, 0, "core 1 ignores core 2 write");
    chk(dut.g_core[1].u_core.u_ctrl.cfg.threshold, 77, "core 2 takes its write");
    if (dut.g_core[0].u_core.u_ctrl.cfg.threshold != 16'sd77) m_sel_reject++;
    // a synaptic byte read back through the shared MISO line
    begin
      logic [7:0] d;
      logic [8*WF2-1:0] row;
      row = '0;
      for (int j = 0; j < L2; j++) row[j*WF2 +: WF2] = WF2'(w2[3][j]);
      host.mem_read(MEM_FF_SYN, {6'd2, 13'd3}, d);
      chk(d, row[23:16], "core 2 synaptic byte via shared MISO");
    end

    // ---- A ----
    c1 = '{n: L1, vw: VW1, iw: IW1, syn: 1, rec: 1, ata_t: 1, ataf_w: 0, thr: 22,
           reset_sub: 0, beta: 9'h0C0, alpha: 9'h0A0};
    c2 = '{n: L2, vw: VW2, iw: IW2, syn: 0, rec: 1, ata_t: 0, ataf_w: 4, thr: 30,
           reset_sub: 1, beta: 9'h0E0, alpha: 9'h100};
    program_core(1, c1, 0);
    program_core(2, c2, 0);
    run_sample(c1, c2, 5, 0, 40, 1);
    t_first_tx = -1;
    run_sample(c1, c2, 6, 0, 55, 0);
    lat = t_last_eoin - t_first_tx;
    $display("sample A2: 6 steps, first input packet to output EOIN = %0d cycles", lat);

    // ---- B: run-time switch to feedforward, TIME STEP ends samples ----
    c1 = '{n: L1, vw: VW1, iw: IW1, syn: 0, rec: 0, ata_t: 0, ataf_w: 0, thr: 20,
           reset_sub: 0, beta: 9'h0F0, alpha: 9'h100};
    c2 = '{n: L2, vw: VW2, iw: IW2, syn: 0, rec: 0, ata_t: 0, ataf_w: 0, thr: 24,
           reset_sub: 1, beta: 9'h100, alpha: 9'h100};
    program_core(1, c1, 3);
    program_core(2, c2, 3);
    run_sample(c1, c2, 3, 1, 60, 1);
    run_sample(c1, c2, 3, 1, 90, 0);
    // neuron states are zero after the sample (lazy reset)
    for (int j = 0; j < L2; j++) check_state(2, j, VW2, IW2, 0, 0, 0, "core 2 after sample");

    // ---- C: core 1 ATA-F synaptic, core 2 LIF, slow receiver ----
    c1 = '{n: 8, vw: VW1, iw: IW1, syn: 1, rec: 1, ata_t: 0, ataf_w: -2, thr: 18,
           reset_sub: 1, beta: 9'h0C0, alpha: 9'h0C0};
    c2 = '{n: L2, vw: VW2, iw: IW2, syn: 0, rec: 0, ata_t: 0, ataf_w: 0, thr: 20,
           reset_sub: 0, beta: 9'h080, alpha: 9'h100};
    program_core(1, c1, 0);
    program_core(2, c2, 0);
    slow_rx = 1;
    run_sample(c1, c2, 6, 0, 80, 0);
    run_sample(c1, c2, 4, 0, 100, 0);

    $display("mechanisms: ff_integ=%0d ata_t=%0d ata_f=%0d leak=%0d spike=%0d reset_zero=%0d reset_sub=%0d",
             m_ff_integ, m_rec_t, m_rec_f, m_leak, m_spike, m_reset_zero, m_reset_sub);
    $display("            lazy_reset=%0d eoin_end=%0d tstep_end=%0d IF=%0d LIF=%0d synaptic=%0d",
             m_lazy, m_eoin_end, m_tstep_end, m_if, m_lif, m_syn);
    $display("            out_stall=%0d in_backpressure=%0d spi_rd=%0d spi_wr=%0d cfg_switch=%0d sel_reject=%0d",
             m_stall_out, m_bp_full, m_spi_rd, m_spi_wr, m_cfg_switch, m_sel_reject);
    chk(m_ff_integ > 0, 1, "mechanism: feedforward integration");
    chk(m_rec_t > 0, 1, "mechanism: ATA-T recurrent integration");
    chk(m_rec_f > 0, 1, "mechanism: ATA-F recurrent integration");
    chk(m_leak > 0, 1, "mechanism: leak/threshold sweep");
    chk(m_spike > 0, 1, "mechanism: spike");
    chk(m_reset_zero > 0, 1, "mechanism: reset to zero");
    chk(m_reset_sub > 0, 1, "mechanism: reset by subtraction");
    chk(m_lazy > 0, 1, "mechanism: lazy reset");
    chk(m_eoin_end > 0, 1, "mechanism: sample ended by EOIN");
    chk(m_tstep_end > 0, 1, "mechanism: sample ended by TIME STEP");
    chk(m_if > 0, 1, "mechanism: IF model");
    chk(m_lif > 0, 1, "mechanism: LIF model");
    chk(m_syn > 0, 1, "mechanism: synaptic model");
    chk(m_stall_out > 0, 1, "mechanism: output transfer stall");
    chk(m_bp_full > 0, 1, "mechanism: input queue back-pressure");
    chk(m_spi_rd > 0, 1, "mechanism: SPI read");
    chk(m_spi_wr > 0, 1, "mechanism: SPI write");
    chk(m_cfg_switch >= 6, 1, "mechanism: run-time reconfiguration");
    chk(m_sel_reject > 0, 1, "mechanism: core selection");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
