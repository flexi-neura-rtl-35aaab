// tb_flexi_neura_full: one inference on the system at its default size.
//
// The top is instantiated without parameter overrides: two cores holding the
// 256-128-10 fully connected LIF network (6-bit weights, 8-bit membrane
// potentials), the main configuration. The host model programs both cores
// over SPI: feedforward weights of the input pixels used by the test image
// (rows of other inputs are never read), all weights of the output layer,
// zero neuron states and the run-time registers (LIF, reset to zero, time
// step count 10). It then streams one 10-step sample of about 20 input
// spikes per step, as a rate-coded image would give, and checks every output
// packet against the reference model.
//
// Timing: the latency from the first input packet to the output EOIN is
// compared with the cycle model of the design: every input ASPL costs
// 2*128+2 cycles in core 1 and every time step a 2*128-cycle leak sweep, so
// the sample cannot finish sooner than that sum. The second core runs in
// parallel; when it falls behind it holds core 1 through the link, and it
// needs 2*10+2 cycles per hidden spike, so the sample must end within that
// sum plus 30 cycles per hidden spike and 300 cycles per step.
// The latency is also printed in microseconds at the paper's 60 MHz clock.
module tb_flexi_neura_full;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int L0 = 256, L1 = 128, L2 = 10, WF = 6, VW = 8, T = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sck, cs_n, mosi, miso;
  logic in_req = 0, in_ack, out_req, out_ack = 0;
  pkt_t in_data = '0, out_data;

  flexi_neura_system dut (
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

  pkt_t tx_q[$];
  pkt_t exp_q[$];
  longint t_first_tx = -1, t_eoin = -1;
  int n_out_spk = 0;

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
      if (exp_q.size() == 0) chk(out_data, 999, "unexpected output packet");
      else chk(out_data, exp_q.pop_front(), "output packet");
      if (!pkt_is_ctrl(out_data)) n_out_spk++;
      if (out_data == PKT_EOIN) t_eoin = $time / 10;
      out_ack = 1;
      do @(negedge clk); while (out_req);
      out_ack = 0;
    end
  end

  initial begin
    #50ms;
    $display("WATCHDOG timeout");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int w1[][], w2[][], none[][];
  int vm1[], is1[], vm2[], is2[];
  bit used1[], used2[];
  int pixels[$];

  task automatic program_core(int id, layer_cfg_t c);
    host.select_core(id);
    host.cfg_write(REG_ACTIVITY_EN, 1);
    host.cfg_write(REG_NEURON_NUMBER, c.n);
    host.cfg_write(REG_FF_RECURRENT, 0);
    host.cfg_write(REG_NEURON_MODEL, 0);
    host.cfg_write(REG_TIME_STEP, T);
    host.cfg_write(REG_THRESHOLD, c.thr);
    host.cfg_write(REG_RESET_MECH, c.reset_sub);
    host.cfg_write(REG_BETA_RATE, c.beta);
  endtask

  layer_cfg_t c1, c2;

  initial begin
    int n_in = 0, n_spk1 = 0;
    longint lat, lo, hi;
    w1 = new[L0]; w2 = new[L1]; used1 = new[L0]; used2 = new[L1];
    foreach (w1[s]) begin
      w1[s] = new[L1];
      foreach (w1[s][j]) w1[s][j] = int'($urandom_range(0, 40)) - 20;
    end
    foreach (w2[s]) begin
      w2[s] = new[L2];
      used2[s] = 1;
      foreach (w2[s][j]) w2[s][j] = int'($urandom_range(0, 22)) - 10;
    end
    vm1 = new[L1]; is1 = new[L1]; vm2 = new[L2]; is2 = new[L2];
    // the "image": 24 distinct active pixels
    while (pixels.size() < 24) begin
      int p;
      p = $urandom_range(0, L0 - 1);
      if (!used1[p]) begin used1[p] = 1; pixels.push_back(p); end
    end
    pixels.sort();

    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);

    c1 = '{n: L1, vw: VW, iw: 8, syn: 0, rec: 0, ata_t: 0, ataf_w: 0, thr: 48,
           reset_sub: 0, beta: 9'h0E0, alpha: 9'h100};
    c2 = '{n: L2, vw: VW, iw: 8, syn: 0, rec: 0, ata_t: 0, ataf_w: 0, thr: 50,
           reset_sub: 0, beta: 9'h0E0, alpha: 9'h100};
    program_core(1, c1);
    host.load_weights(MEM_FF_SYN, w1, L0, L1, WF, used1);
    host.clear_states(L1, 1);
    program_core(2, c2);
    host.load_weights(MEM_FF_SYN, w2, L1, L2, WF, used2);
    host.clear_states(L2, 1);
    $display("programmed with %0d SPI frames by t=%0d cycles", host.frames, $time / 10);

    for (int s = 0; s < T; s++) begin
      int in_spk[$], s1[$], s2[$], r[$], ri[$];
      in_spk = {};
      ri = {};
      foreach (pixels[k]) if ($urandom_range(0, 99) < 80) in_spk.push_back(pixels[k]);
      foreach (in_spk[k]) tx_q.push_back(make_aspl(naddr_t'(in_spk[k])));
      tx_q.push_back(PKT_EOTS);     // the TIME STEP register ends the sample
      n_in += in_spk.size();
      layer_step(c1, w1, none, vm1, is1, in_spk, ri, s == T - 1, s1, r);
      layer_step(c2, w2, none, vm2, is2, s1, ri, s == T - 1, s2, r);
      n_spk1 += s1.size();
      foreach (s2[k]) exp_q.push_back(make_aspl(naddr_t'(s2[k])));
      exp_q.push_back(s == T - 1 ? PKT_EOIN : PKT_EOTS);
    end
    begin
      int t = 0;
      while (exp_q.size() > 0 && t < 2000000) begin @(negedge clk); t++; end
    end
    chk(exp_q.size(), 0, "all output packets received");
    chk(n_spk1 > 0 && n_out_spk > 0, 1, "spikes reached the output layer");

    lat = t_eoin - t_first_tx;
    lo = longint'(n_in) * (2 * L1 + 2) + T * 2 * L1;
    $display("sample: %0d input spikes, %0d hidden spikes, %0d output spikes", n_in, n_spk1, n_out_spk);
    $display("latency %0d cycles (cycle model lower bound %0d) = %0d us at 60 MHz",
             lat, lo, lat / 60);
    chk(lat >= lo, 1, "latency not below the cycle model");
    hi = lo + longint'(n_spk1) * (2 * L2 + 2 + 8) + T * 300;
    $display("cycle model upper bound %0d", hi);
    chk(lat <= hi, 1, "latency within the cycle model");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
