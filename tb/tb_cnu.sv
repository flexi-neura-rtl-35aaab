// tb_cnu: the CNU with both synaptic memories and the synaptic model built.
// Weights and states are loaded through the byte (SPI) port; then the test
// runs feedforward integration sweeps, ATA-T recurrent sweeps, an ATA-F self
// update and a leak/spike sweep in the two-cycle read/write-back sequence,
// for the LIF and then the synaptic model, and compares spikes and the states
// read back over the byte port with the reference model.
//
// Timing checked: the spike flag and written state appear in the write-back
// cycle that follows each read cycle. The memory organisation (blocks, rows of
// 8 weights, byte-rounded state rows) follows the published design; the
// two-cycle access is this design's. A watchdog bounds the run.
module tb_cnu;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP = 6, N = 10, WF = 5, WR = 4, VW = 9, IW = 8;
  localparam int ROWS = 2;  // 10 destinations -> 2 rows of 8
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic rd = 0, wb = 0, rec_sel = 0, lazy_reset = 0, spike;
  cnu_op_e op = OP_NONE;
  naddr_t src = 0, dst = 0;
  logic b_en = 0, b_we = 0;
  mem_target_e b_target = MEM_NEUR;
  logic [18:0] b_addr = 0;
  logic [7:0] b_wdata = 0, b_rdata;

  int wff [][], wrec [][];
  int vm [], is [];

  cnu #(.N_PREV(NP), .N(N), .W_FF(WF), .W_REC(WR), .V_W(VW), .I_W(IW),
        .REC_MEM(1'b1), .SYNAPTIC(1'b1)) dut (.*);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic bwrite(mem_target_e t, logic [18:0] a, logic [7:0] d);
    @(negedge clk); b_en = 1; b_we = 1; b_target = t; b_addr = a; b_wdata = d;
    @(negedge clk); b_en = 0; b_we = 0;
  endtask

  task automatic bread(mem_target_e t, logic [18:0] a, output logic [7:0] d);
    @(negedge clk); b_en = 1; b_we = 0; b_target = t; b_addr = a;
    @(negedge clk); b_en = 0; d = b_rdata;
  endtask

  task automatic load_syn(mem_target_e t, int w [][], int ns, int ww);
    for (int s = 0; s < ns; s++)
      for (int r = 0; r < ROWS; r++) begin
        logic [63:0] row;
        row = '0;
        for (int j = 0; j < 8; j++)
          if (r * 8 + j < N) row[j*ww +: 8] = 8'(w[s][r*8+j] & ((1 << ww) - 1));
        for (int b = 0; b < ww; b++)
          bwrite(t, {6'(b), 13'(s * ROWS + r)}, row[b*8 +: 8]);
      end
  endtask

  task automatic step(cnu_op_e o, bit rs, int s, int d, output bit sp);
    @(negedge clk); rd = 1; op = o; rec_sel = rs; src = naddr_t'(s); dst = naddr_t'(d);
    @(negedge clk); rd = 0; wb = 1;
    #1 sp = spike;
    @(negedge clk); wb = 0; op = OP_NONE;
  endtask

  task automatic check_states(string tag);
    for (int j = 0; j < N; j++) begin
      logic [7:0] b0, b1, b2;
      logic [23:0] row;
      bread(MEM_NEUR, {11'd0, 8'(j)}, b0);
      bread(MEM_NEUR, {11'd1, 8'(j)}, b1);
      bread(MEM_NEUR, {11'd2, 8'(j)}, b2);
      row = {b2, b1, b0};
      chk(sext(int'(row[VW-1:0]), VW), vm[j], $sformatf("%s vm[%0d]", tag, j));
      chk(sext(int'(row[VW +: IW]), IW), is[j], $sformatf("%s isyn[%0d]", tag, j));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_cfg_t c;
    int in_spk[$], rec_in[$], out_spk[$], rec_out[$];
    bit sp;
    wff = new[NP]; foreach (wff[s]) begin wff[s] = new[N]; foreach (wff[s][d]) wff[s][d] = sext($urandom, WF); end
    wrec = new[N]; foreach (wrec[s]) begin wrec[s] = new[N]; foreach (wrec[s][d]) wrec[s][d] = sext($urandom, WR); end
    vm = new[N]; is = new[N];
    cfg = '0;
    cfg.threshold = 16'sd20; cfg.beta_rate = 9'b011000000; cfg.alpha_rate = 9'b010100000;
    cfg.ataf_weight = 16'sd7; cfg.reset_sub = 1'b1;
    load_syn(MEM_FF_SYN, wff, NP, WF);
    load_syn(MEM_REC_SYN, wrec, N, WR);
    for (int j = 0; j < N; j++) begin
      vm[j] = sext($urandom, 5); is[j] = sext($urandom, 5);
      bwrite(MEM_NEUR, {11'd0, 8'(j)}, 8'(vm[j]));
      bwrite(MEM_NEUR, {11'd1, 8'(j)}, 8'({IW'(is[j]), 1'((vm[j] >> 8) & 1)}));
      bwrite(MEM_NEUR, {11'd2, 8'(j)}, 8'(IW'(is[j]) >> 7));
    end
    check_states("load");
    // pass 0: LIF with ATA-T recurrence; pass 1: synaptic model with ATA-F
    for (int pass = 0; pass < 2; pass++) begin
      int got_spk[$];
      got_spk = {};
      cfg.synaptic = 1'(pass);
      c.n = N; c.vw = VW; c.iw = IW; c.syn = cfg.synaptic; c.rec = 1;
      c.ata_t = (pass == 0); c.ataf_w = 7; c.thr = 20; c.reset_sub = 1;
      c.beta = int'(cfg.beta_rate); c.alpha = int'(cfg.alpha_rate);
      in_spk = '{2, 5, 0, 5}; rec_in = '{1, 8};
      foreach (in_spk[k]) for (int j = 0; j < N; j++) step(OP_INTEG, 0, in_spk[k], j, sp);
      foreach (rec_in[k])
        if (c.ata_t) for (int j = 0; j < N; j++) step(OP_INTEG, 1, rec_in[k], j, sp);
        else         step(OP_INTEG_SELF, 0, rec_in[k], rec_in[k], sp);
      for (int j = 0; j < N; j++) begin
        step(OP_LEAK, 0, 0, j, sp);
        if (sp) got_spk.push_back(j);
      end
      layer_step(c, wff, wrec, vm, is, in_spk, rec_in, 1'b0, out_spk, rec_out);
      chk(got_spk.size(), out_spk.size(), "spike count");
      foreach (out_spk[k]) if (k < got_spk.size()) chk(got_spk[k], out_spk[k], "spike neuron");
      check_states($sformatf("pass %0d", pass));
    end
    // lazy reset: a leak sweep with lazy_reset clears every state
    lazy_reset = 1;
    for (int j = 0; j < N; j++) step(OP_LEAK, 0, 0, j, sp);
    lazy_reset = 0;
    foreach (vm[j]) begin vm[j] = 0; is[j] = 0; end
    check_states("lazy reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
