// tb_controller: the controller driving a real CNU (8 inputs, 8 neurons,
// recurrent memory and synaptic model built). The testbench plays the SPI
// memory-access unit (memory requests), the two scheduler queues and AER-OUT
// (acknowledging after random delays). It loads weights and clears states
// through the six configuration micro-states, reads a byte back, then runs
// three samples of four time steps: ATA-T LIF, ATA-F LIF and feedforward
// synaptic. Every packet sent is compared with the reference model, the cost
// of an ASPL is checked to be 2*N+2 cycles (WAIT, N two-cycle neuron
// updates, POP), and each controller state must have been visited.
module tb_controller;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP = 8, N = 8, WF = 6, WR = 5, VW = 8, IW = 8, T = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic mem_req = 0, mem_we = 0, mem_ack, mem_rvalid;
  mem_target_e mem_target = MEM_NEUR;
  logic [18:0] mem_addr = 0;
  logic [7:0] mem_wdata = 0, mem_rdata;
  logic ff_valid, ff_pop, rec_push, rec_valid, rec_pop;
  pkt_t ff_data;
  naddr_t rec_wdata, rec_data;
  logic tx_valid, tx_ready;
  pkt_t tx_data;
  logic cnu_rd, cnu_wb, cnu_rec_sel, cnu_lazy_reset, cnu_spike;
  cnu_op_e cnu_op;
  naddr_t cnu_src, cnu_dst;
  logic b_en, b_we;
  mem_target_e b_target;
  logic [18:0] b_addr;
  logic [7:0] b_wdata, b_rdata;

  controller #(.N(N), .RECURRENT(1'b1), .REC_MEM(1'b1)) dut (.*);

  cnu #(.N_PREV(NP), .N(N), .W_FF(WF), .W_REC(WR), .V_W(VW), .I_W(IW),
        .REC_MEM(1'b1), .SYNAPTIC(1'b1)) u_cnu (
    .clk, .cfg, .rd(cnu_rd), .wb(cnu_wb), .op(cnu_op), .rec_sel(cnu_rec_sel),
    .src(cnu_src), .dst(cnu_dst), .lazy_reset(cnu_lazy_reset), .spike(cnu_spike),
    .b_en, .b_we, .b_target, .b_addr, .b_wdata, .b_rdata);

  // queue models
  pkt_t   ffq[$];
  naddr_t recq[$];
  pkt_t   sent[$];
  assign ff_valid  = ffq.size() != 0;
  assign ff_data   = ff_valid ? ffq[0] : '0;
  assign rec_valid = recq.size() != 0;
  assign rec_data  = rec_valid ? recq[0] : '0;
  always @(posedge clk) begin
    if (ff_pop && ffq.size() != 0) void'(ffq.pop_front());
    if (rec_pop && recq.size() != 0) void'(recq.pop_front());
    if (rec_push) recq.push_back(rec_wdata);
  end

  // AER-OUT model: ready after a random delay
  int wait_cnt = 0;
  assign tx_ready = tx_valid && wait_cnt == 0;
  always @(posedge clk) begin
    if (tx_valid && tx_ready) begin
      sent.push_back(tx_data);
      wait_cnt <= $urandom % 4;
    end else if (tx_valid && wait_cnt > 0) wait_cnt <= wait_cnt - 1;
  end

  // state coverage
  int seen [16];
  int t_first_rd = -1, t_pop = -1, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    seen[int'(dut.state)]++;
    if (cnu_rd && t_first_rd < 0 && int'(dut.state) == 8) t_first_rd = cyc;
    if (ff_pop && t_pop < 0) t_pop = cyc;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic mem_access(logic we, mem_target_e t, logic [18:0] a, logic [7:0] d,
                            output logic [7:0] q);
    @(negedge clk);
    mem_req = 1; mem_we = we; mem_target = t; mem_addr = a; mem_wdata = d;
    @(posedge clk);
    while (!mem_ack) @(posedge clk);
    @(negedge clk); mem_req = 0;
    @(posedge clk);
    while (!mem_rvalid && !we) @(posedge clk);
    q = mem_rdata;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    $display("WATCHDOG timeout");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wff [][], wrec [][];
    int vm [], is [];
    layer_cfg_t c;
    int in_spk[$], rec_in[$], out_spk[$], rec_out[$];
    pkt_t exp_pkts[$];
    logic [7:0] q;
    wff = new[NP]; foreach (wff[s]) begin wff[s] = new[N]; foreach (wff[s][d]) wff[s][d] = sat_ref(sext($urandom, WF) + 6, WF); end
    wrec = new[N]; foreach (wrec[s]) begin wrec[s] = new[N]; foreach (wrec[s][d]) wrec[s][d] = sext($urandom, WR); end
    vm = new[N]; is = new[N];
    cfg = '0;
    cfg.activity_en = 1; cfg.neuron_number = 9'(N); cfg.recurrent = 1; cfg.all_to_all = 1;
    cfg.threshold = 16'sd40; cfg.reset_sub = 0; cfg.beta_rate = 9'b011100000;
    cfg.alpha_rate = 9'b011000000; cfg.ataf_weight = 16'sd9;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load through the configuration micro-states
    for (int s = 0; s < NP; s++) begin
      logic [47:0] row;
      row = '0;
      for (int j = 0; j < 8; j++) row[j*WF +: WF] = WF'(wff[s][j]);
      for (int b = 0; b < WF; b++) mem_access(1, MEM_FF_SYN, {6'(b), 13'(s)}, row[b*8 +: 8], q);
    end
    for (int s = 0; s < N; s++) begin
      logic [39:0] row;
      row = '0;
      for (int j = 0; j < 8; j++) row[j*WR +: WR] = WR'(wrec[s][j]);
      for (int b = 0; b < WR; b++) mem_access(1, MEM_REC_SYN, {6'(b), 13'(s)}, row[b*8 +: 8], q);
    end
    for (int j = 0; j < N; j++) begin
      mem_access(1, MEM_NEUR, {11'd0, 8'(j)}, 8'h00, q);
      mem_access(1, MEM_NEUR, {11'd1, 8'(j)}, 8'h00, q);
    end
    mem_access(0, MEM_FF_SYN, {6'd2, 13'd3}, 8'h00, q);
    begin
      logic [47:0] row;
      for (int j = 0; j < 8; j++) row[j*WF +: WF] = WF'(wff[3][j]);
      chk(q, row[23:16], "read back through R states");
    end
    mem_access(0, MEM_REC_SYN, {6'd0, 13'd1}, 8'h00, q);
    mem_access(0, MEM_NEUR, {11'd0, 8'd1}, 8'h00, q);
    chk(q, 0, "neuron state read back");

    // ASPL timing: a single packet, measure WAIT -> POP
    begin
      ffq.push_back(make_aspl(8'd0));
      while (ffq.size() != 0) @(posedge clk);
      chk(t_pop - t_first_rd, 2 * N, "cycles from first neuron read to POP");
      foreach (vm[j]) vm[j] = sat_ref(vm[j] + wff[0][j], VW);
    end

    for (int smp = 0; smp < 3; smp++) begin
      c.n = N; c.vw = VW; c.iw = IW; c.thr = 40; c.reset_sub = 0;
      c.beta = int'(cfg.beta_rate); c.alpha = int'(cfg.alpha_rate); c.ataf_w = 9;
      c.rec = (smp < 2); c.ata_t = (smp == 0); c.syn = (smp == 2);
      cfg.recurrent = c.rec; cfg.all_to_all = c.ata_t; cfg.synaptic = c.syn;
      rec_in = {};
      exp_pkts = {};
      sent = {};
      for (int t = 0; t < T; t++) begin
        in_spk = {};
        for (int s = 0; s < NP; s++) if ($urandom % 2) in_spk.push_back(s);
        if (smp == 0 && t == 0) in_spk.push_front(0);  // ASPL already integrated above
        foreach (in_spk[k]) if (!(smp == 0 && t == 0 && k == 0)) ffq.push_back(make_aspl(8'(in_spk[k])));
        ffq.push_back(t == T - 1 ? PKT_EOIN : PKT_EOTS);
        if (smp == 0 && t == 0) void'(in_spk.pop_front());
        layer_step(c, wff, wrec, vm, is, in_spk, rec_in, t == T - 1, out_spk, rec_out);
        rec_in = rec_out;
        foreach (out_spk[k]) exp_pkts.push_back(make_aspl(8'(out_spk[k])));
        exp_pkts.push_back(t == T - 1 ? PKT_EOIN : PKT_EOTS);
        while (ffq.size() != 0) @(posedge clk);
        repeat (2) @(posedge clk);
      end
      chk(sent.size(), exp_pkts.size(), $sformatf("sample %0d packet count", smp));
      foreach (exp_pkts[k]) if (k < sent.size()) chk(sent[k], exp_pkts[k], $sformatf("sample %0d packet %0d", smp, k));
      chk(recq.size(), 0, "recurrent queue empty after EOIN");
    end
    for (int s = 0; s < 14; s++) chk(seen[s] > 0, 1, $sformatf("state %0d visited", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
