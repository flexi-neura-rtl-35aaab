// tb_workload_net: one two-core system of a given size with its host model,
// used by tb_flexi_neura_workloads to run a published workload.
//
// The system is built with every optional part in both cores (recurrent
// queue, ATA-T recurrent memory, synaptic model), so that all nine
// neuron-model x topology variants of the accuracy table can be selected at
// run time. The task run_all loads random weights over SPI once (the
// feedforward rows of the input channels that can spike, all recurrent rows,
// all output-layer rows), then for each variant writes the registers of both
// cores, streams one sample of T steps (EOTS per step, EOIN at the end) and
// checks every output packet, in order, against two chained reference
// layers. The lazy reset at EOIN leaves the states at zero for the next
// variant, which the reference relies on. Interface: parameters only; results
// are returned through run_all's outputs. Links use the four-phase handshake
// of this design; the sizes and step counts are the published ones.
module tb_workload_net #(
  parameter int    L0 = 16,
  parameter int    L1 = 8,
  parameter int    L2 = 4,
  parameter int    T  = 4,
  parameter int    N_ACTIVE = 8,     // input channels that carry spikes
  parameter int    P_SPK = 30        // spike probability per active channel and step, %
) ();
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 6, VW = 8, IW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sck, cs_n, mosi, miso;
  logic in_req = 0, in_ack, out_req, out_ack = 0;
  pkt_t in_data = '0, out_data;

  flexi_neura_system #(
    .NUM_CORES(2), .LAYERS('{L0, L1, L2}), .RECURRENT(2'b11), .ATA_T(2'b11), .SYNAPTIC(2'b11)
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
      if (failures < 10) $display("FAIL %m %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  pkt_t tx_q[$];
  pkt_t exp_q[$];
  longint t_first = -1, t_eoin = -1;

  initial forever begin
    @(negedge clk);
    if (tx_q.size() > 0) begin
      if (t_first < 0) t_first = $time / 10;
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
      if (exp_q.size() == 0) chk(out_data, 999, "unexpected output packet");
      else chk(out_data, exp_q.pop_front(), "output packet");
      if (out_data == PKT_EOIN) t_eoin = $time / 10;
      out_ack = 1;
      do @(negedge clk); while (out_req);
      out_ack = 0;
    end
  end

  int w1[][], r1[][], w2[][], r2[][];
  int vm1[], is1[], vm2[], is2[];

  function automatic void rand_w(ref int w[][], input int ns, int nd, int lo, int hi);
    w = new[ns];
    foreach (w[s]) begin
      w[s] = new[nd];
      foreach (w[s][j]) w[s][j] = lo + int'($urandom_range(0, hi - lo));
    end
  endfunction

  task automatic program_core(int id, layer_cfg_t c);
    host.select_core(id);
    host.cfg_write(REG_ACTIVITY_EN, 1);
    host.cfg_write(REG_NEURON_NUMBER, c.n);
    host.cfg_write(REG_FF_RECURRENT, c.rec);
    host.cfg_write(REG_NEURON_MODEL, c.syn);
    host.cfg_write(REG_TIME_STEP, 0);
    host.cfg_write(REG_ALL_TO_ALL, c.ata_t);
    host.cfg_write(REG_ATAF_WEIGHT, c.ataf_w & 16'hffff);
    host.cfg_write(REG_THRESHOLD, c.thr);
    host.cfg_write(REG_RESET_MECH, c.reset_sub);
    host.cfg_write(REG_BETA_RATE, c.beta);
    host.cfg_write(REG_ALPHA_RATE, c.alpha);
  endtask

  // Runs the nine variants; returns the checks, failures and the number of
  // hidden- and output-layer spikes seen.
  task automatic run_all(string name, output int n_chk, output int n_fail,
                         output int hid_spk, output int out_spk);
    bit used1[], used2[], used3[];
    int chans[$];
    string model_s[3] = '{"IF", "LIF", "Synaptic"};
    string topo_s[3] = '{"FF", "ATA-F", "ATA-T"};
    hid_spk = 0;
    out_spk = 0;
    rand_w(w1, L0, L1, -12, 20);
    rand_w(r1, L1, L1, -10, 6);
    rand_w(w2, L1, L2, -10, 20);
    rand_w(r2, L2, L2, -10, 6);
    vm1 = new[L1]; is1 = new[L1]; vm2 = new[L2]; is2 = new[L2];
    used1 = new[L0]; used2 = new[L1]; used3 = new[L2];
    while (chans.size() < N_ACTIVE) begin
      int p;
      p = $urandom_range(0, L0 - 1);
      if (!used1[p]) begin used1[p] = 1; chans.push_back(p); end
    end
    chans.sort();
    foreach (used2[k]) used2[k] = 1;
    foreach (used3[k]) used3[k] = 1;

    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    host.select_core(1);
    host.load_weights(MEM_FF_SYN, w1, L0, L1, W, used1);
    host.load_weights(MEM_REC_SYN, r1, L1, L1, W, used2);
    host.clear_states(L1, 2);
    host.select_core(2);
    host.load_weights(MEM_FF_SYN, w2, L1, L2, W, used2);
    host.load_weights(MEM_REC_SYN, r2, L2, L2, W, used3);
    host.clear_states(L2, 2);

    for (int m = 0; m < 3; m++)
      for (int tp = 0; tp < 3; tp++) begin
        layer_cfg_t c1, c2;
        int h = 0, o = 0;
        longint lat;
        c1 = '{n: L1, vw: VW, iw: IW, syn: (m == 2), rec: (tp > 0), ata_t: (tp == 2),
               ataf_w: 3, thr: 40, reset_sub: (m == 1), beta: (m == 0) ? 9'h100 : 9'h0E0,
               alpha: 9'h0C0};
        c2 = c1;
        c2.n = L2;
        c2.thr = 30;
        program_core(1, c1);
        program_core(2, c2);
        t_first = -1;
        begin
          int rin1[$], rin2[$], ro1[$], ro2[$], s1[$], s2[$], in_spk[$];
          rin1 = {}; rin2 = {};
          for (int s = 0; s < T; s++) begin
            bit last = (s == T - 1);
            in_spk = {};
            foreach (chans[k]) if ($urandom_range(0, 99) < P_SPK) in_spk.push_back(chans[k]);
            foreach (in_spk[k]) tx_q.push_back(make_aspl(naddr_t'(in_spk[k])));
            tx_q.push_back(last ? PKT_EOIN : PKT_EOTS);
            layer_step(c1, w1, r1, vm1, is1, in_spk, rin1, last, s1, ro1);
            layer_step(c2, w2, r2, vm2, is2, s1, rin2, last, s2, ro2);
            foreach (s2[k]) exp_q.push_back(make_aspl(naddr_t'(s2[k])));
            exp_q.push_back(last ? PKT_EOIN : PKT_EOTS);
            rin1 = ro1; rin2 = ro2;
            h += s1.size();
            o += s2.size();
          end
        end
        begin
          int t = 0;
          while (exp_q.size() > 0 && t < 5000000) begin @(negedge clk); t++; end
        end
        chk(exp_q.size(), 0, "all output packets received");
        lat = t_eoin - t_first;
        $display("%s %s %s: %0d steps, hidden spikes %0d, output spikes %0d, %0d cycles = %0d us at 60 MHz",
                 name, model_s[m], topo_s[tp], T, h, o, lat, lat / 60);
        hid_spk += h;
        out_spk += o;
      end
    n_chk = checks;
    n_fail = failures;
  endtask
endmodule
