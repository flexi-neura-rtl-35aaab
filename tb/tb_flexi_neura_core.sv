// tb_flexi_neura_core: self-checking test of one core through its pins only.
//
// A reduced core (12 inputs, 10 neurons, recurrent with ATA-T memory and the
// synaptic model built, 4-deep input queue) is programmed with the SPI host
// model (configuration registers, feedforward and recurrent weights, neuron
// state), fed spike packets over a four-phase AER link and its output packets
// are compared, in order, with the reference layer model of tb_ref_pkg.
// Neuron states are read back over SPI and compared too.
//
// Scenarios: ATA-T synaptic with reset to zero and EOIN-terminated samples,
// ATA-F LIF with reset by subtraction and samples ended by the TIME STEP
// register with a reduced neuron number, feedforward IF. The output receiver
// acknowledges after random delays, and the input sender runs ahead of the
// core so that the input queue fills and back-pressures the link.
// Cycle check: an ASPL costs 2*NeuronNumber+2 cycles from pop to pop when the
// queue is full (measured on the controller's queue pops).
module tb_flexi_neura_core;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP = 12, N = 10, WF = 5, WR = 4, VW = 8, IW = 7;
  localparam int NBYTES = (VW + IW + 7) / 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sck, cs_n, mosi, miso, miso_oe;
  logic in_req = 0, in_ack, out_req, out_ack = 0;
  pkt_t in_data = '0, out_data;

  flexi_neura_core #(.CORE_ID(8'd1), .N_PREV(NP), .N(N), .W_FF(WF), .W_REC(WR),
    .V_W(VW), .I_W(IW), .RECURRENT(1'b1), .ATA_T(1'b1), .SYNAPTIC(1'b1),
    .FF_DEPTH(4)) dut (
    .clk, .rst_n, .sck, .cs_n, .mosi, .miso, .miso_oe, .in_req, .in_data,
    .in_ack, .out_req, .out_data, .out_ack);

  tb_spi_host #(.H(3)) host (.clk, .sck, .cs_n, .mosi, .miso(miso & miso_oe));

  int checks = 0, failures = 0;
  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // ---------------- AER sender and receiver ----------------
  pkt_t tx_q[$];
  pkt_t exp_q[$];
  int   rx_count = 0;
  int   n_bp = 0;          // cycles the link was held off by a full queue
  int   n_slow_ack = 0;    // packets acknowledged late by the receiver

  initial forever begin
    @(negedge clk);
    if (tx_q.size() > 0) begin
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
      int d;
      d = $urandom_range(0, 3) == 0 ? $urandom_range(5, 40) : 0;
      if (d > 0) n_slow_ack++;
      repeat (d) @(negedge clk);
      if (exp_q.size() == 0) chk(out_data, 999, "unexpected output packet");
      else chk(out_data, exp_q.pop_front(), "output packet");
      rx_count++;
      out_ack = 1;
      do @(negedge clk); while (out_req);
      out_ack = 0;
    end
  end

  always @(posedge clk) if (in_req && !in_ack && dut.u_amu.u_sched.ff_full) n_bp++;

  // ---------------- state visit and timing monitor ----------------
  int visits[14];
  longint last_pop = -1;
  bit last_pop_full = 0, last_pop_aspl = 0;
  int n_pop_timed = 0;
  always @(posedge clk) if (rst_n) begin
    visits[int'(dut.u_ctrl.state)]++;
    if (dut.u_ctrl.ff_pop) begin
      if (last_pop >= 0 && last_pop_full && last_pop_aspl && !pkt_is_ctrl(dut.u_ctrl.ff_data)) begin
        chk($time / 10 - last_pop, 2 * dut.u_ctrl.cfg.neuron_number + 2, "ASPL pop-to-pop cycles");
        n_pop_timed++;
      end
      last_pop = $time / 10;
      last_pop_full = dut.u_amu.u_sched.ff_full;
      last_pop_aspl = !pkt_is_ctrl(dut.u_ctrl.ff_data);
    end
  end

  initial begin
    #5ms;
    $display("WATCHDOG timeout");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference state ----------------
  int wff[][], wrec[][];
  int vm[], is_[];
  bit used[];
  int n_spk = 0, n_steps = 0, n_reset_sub = 0, n_reset_zero = 0;

  task automatic wait_outputs();
    int t = 0;
    while (exp_q.size() > 0 && t < 200000) begin @(negedge clk); t++; end
    chk(exp_q.size(), 0, "all expected packets received");
    repeat (10) @(negedge clk);
  endtask

  task automatic read_states(int n, int syn, string what);
    for (int j = 0; j < n; j++) begin
      logic [7:0] b0, b1;
      logic [15:0] row;
      host.mem_read(MEM_NEUR, {11'd0, 8'(j)}, b0);
      host.mem_read(MEM_NEUR, {11'd1, 8'(j)}, b1);
      row = {b1, b0};
      chk(sext(row[VW-1:0], VW), vm[j], {what, " Vm"});
      if (syn) chk(sext(int'(row[VW +: IW]), IW), is_[j], $sformatf("%s Isyn[%0d]", what, j));
    end
  endtask

  // One sample of nsteps steps. end_by_reg: the host sends only EOTS and the
  // TIME STEP register ends the sample; otherwise the last packet is EOIN.
  task automatic run_sample(layer_cfg_t c, int nsteps, bit end_by_reg, bit readback,
                            real p_spk);
    int rec_in[$], rec_out[$], out_spk[$], in_spk[$];
    rec_in = {};
    for (int s = 0; s < nsteps; s++) begin
      bit last = (s == nsteps - 1);
      in_spk = {};
      for (int k = 0; k < NP; k++)
        if ($urandom_range(0, 999) < int'(p_spk * 1000)) in_spk.push_back(k);
      foreach (in_spk[k]) tx_q.push_back(make_aspl(naddr_t'(in_spk[k])));
      tx_q.push_back((last && !end_by_reg) ? PKT_EOIN : PKT_EOTS);
      layer_step(c, wff, wrec, vm, is_, in_spk, rec_in, last, out_spk, rec_out);
      foreach (out_spk[k]) exp_q.push_back(make_aspl(naddr_t'(out_spk[k])));
      exp_q.push_back(last ? PKT_EOIN : PKT_EOTS);
      n_spk += out_spk.size();
      if (out_spk.size() > 0) begin
        if (c.reset_sub) n_reset_sub++; else n_reset_zero++;
      end
      n_steps++;
      rec_in = rec_out;
      if (readback && !last) begin
        wait_outputs();
        read_states(c.n, c.syn, "mid-sample state");
      end
    end
    wait_outputs();
  endtask

  task automatic program_core(layer_cfg_t c, int tstep);
    host.select_core(1);
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
  endtask

  layer_cfg_t c;

  initial begin
    wff = new[NP]; wrec = new[N]; used = new[NP];
    foreach (wff[s]) begin
      wff[s] = new[N];
      used[s] = 1;
      foreach (wff[s][j]) wff[s][j] = $urandom_range(0, 3) == 0 ? -int'($urandom_range(0, 8))
                                                                : int'($urandom_range(0, 15));
    end
    foreach (wrec[s]) begin
      wrec[s] = new[N];
      foreach (wrec[s][j]) wrec[s][j] = int'($urandom_range(0, 15)) - 8;
    end
    vm = new[N]; is_ = new[N];

    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);

    // Nothing may answer SPI before the core is selected.
    begin
      logic [7:0] d;
      host.mem_read(MEM_NEUR, 19'd0, d);
      chk(d, 0, "unselected core does not drive MISO");
    end

    // ---- scenario 1: ATA-T, synaptic, reset to zero, EOIN ends samples ----
    c = '{n: N, vw: VW, iw: IW, syn: 1, rec: 1, ata_t: 1, ataf_w: 0, thr: 20,
          reset_sub: 0, beta: 9'h0C0, alpha: 9'h080};
    program_core(c, 0);
    host.load_weights(MEM_FF_SYN, wff, NP, N, WF, used);
    begin
      bit all[] = new[N];
      foreach (all[k]) all[k] = 1;
      host.load_weights(MEM_REC_SYN, wrec, N, N, WR, all);
    end
    // random initial states, written and read back over SPI
    for (int j = 0; j < N; j++) begin
      logic [15:0] row;
      vm[j] = int'($urandom_range(0, 30)) - 15;
      is_[j] = int'($urandom_range(0, 20)) - 10;
      row = '0;
      row[VW-1:0] = VW'(vm[j]);
      row[VW +: IW] = IW'(is_[j]);
      host.mem_write(MEM_NEUR, {11'd0, 8'(j)}, row[7:0]);
      host.mem_write(MEM_NEUR, {11'd1, 8'(j)}, row[15:8]);
    end
    read_states(N, 1, "initial state");
    // read back a few synaptic bytes
    for (int s = 0; s < 3; s++) begin
      logic [7:0] d;
      logic [8*WF-1:0] row;
      row = '0;
      for (int j = 0; j < 8; j++) row[j*WF +: WF] = WF'(wff[s][j]);
      host.mem_read(MEM_FF_SYN, {6'd1, 13'(s * 2)}, d);
      chk(d, row[15:8], "FF synaptic byte read-back");
    end
    begin
      logic [7:0] d;
      logic [8*WR-1:0] row;
      row = '0;
      for (int j = 0; j < 8; j++) row[j*WR +: WR] = WR'(wrec[4][j]);
      host.mem_read(MEM_REC_SYN, {6'd0, 13'(4 * 2)}, d);
      chk(d, row[7:0], "recurrent synaptic byte read-back");
    end
    run_sample(c, 5, 0, 1, 0.4);
    read_states(N, 1, "state after sample (lazy reset)");
    run_sample(c, 6, 0, 0, 0.5);

    // ---- scenario 2: ATA-F, LIF, reset by subtraction, TIME STEP ends ----
    c = '{n: 7, vw: VW, iw: IW, syn: 0, rec: 1, ata_t: 0, ataf_w: 5, thr: 18,
          reset_sub: 1, beta: 9'h0E0, alpha: 9'h100};
    program_core(c, 4);
    run_sample(c, 4, 1, 1, 0.5);
    run_sample(c, 4, 1, 0, 0.6);
    c.ataf_w = -3;
    host.cfg_write(REG_ATAF_WEIGHT, c.ataf_w & 16'hffff);
    run_sample(c, 4, 1, 0, 0.6);

    // ---- scenario 3: feedforward IF (no leak), queue back-pressure ----
    c = '{n: N, vw: VW, iw: IW, syn: 0, rec: 0, ata_t: 0, ataf_w: 0, thr: 25,
          reset_sub: 0, beta: 9'h100, alpha: 9'h100};
    program_core(c, 0);
    run_sample(c, 6, 0, 1, 0.9);

    // ---- activity disabled: packets wait in the queue ----
    host.cfg_write(REG_ACTIVITY_EN, 0);
    tx_q.push_back(make_aspl(8'd3));
    tx_q.push_back(PKT_EOIN);
    repeat (500) @(negedge clk);
    chk(exp_q.size(), 0, "no output while inactive");
    chk(int'(out_req), 0, "no request while inactive");
    begin
      int o[$], r[$], none[$];
      host.cfg_write(REG_ACTIVITY_EN, 1);
      none = {};
      layer_step(c, wff, wrec, vm, is_, '{3}, none, 1, o, r);
      foreach (o[k]) exp_q.push_back(make_aspl(naddr_t'(o[k])));
      exp_q.push_back(PKT_EOIN);
      wait_outputs();
    end

    // ---- mechanism coverage ----
    $display("mechanisms: steps=%0d spikes=%0d reset_zero=%0d reset_sub=%0d backpressure=%0d slow_ack=%0d timed_pops=%0d spi_frames=%0d",
             n_steps, n_spk, n_reset_zero, n_reset_sub, n_bp, n_slow_ack, n_pop_timed, host.frames);
    chk(n_spk > 0, 1, "spikes produced");
    chk(n_reset_zero > 0, 1, "reset-to-zero used");
    chk(n_reset_sub > 0, 1, "reset-by-subtraction used");
    chk(n_bp > 0, 1, "input back-pressure seen");
    chk(n_slow_ack > 0, 1, "slow output acknowledge seen");
    chk(n_pop_timed > 0, 1, "ASPL timing measured");
    foreach (visits[k]) chk(visits[k] > 0, 1, $sformatf("controller state %0d visited", k));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
