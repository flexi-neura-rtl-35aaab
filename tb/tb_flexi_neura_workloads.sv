// tb_flexi_neura_workloads: the published benchmark networks, at their sizes.
//
// Three systems, each with every optional part built (see tb_workload_net):
//   SHD speech digits   233-128-20, 70 time steps
//   DVS gestures        256-128-11, 80 time steps
//   MNIST               256-128-10, 10 time steps
// Each runs the nine variants of the accuracy table (IF, LIF, Synaptic x FF,
// ATA-F, ATA-T), switched at run time over SPI, on one random-weight sample
// with sparse random input spikes in place of the real data sets, which are
// not available here. Every output packet is checked against the reference
// model; the latency of each sample is printed. A workload that produced no
// hidden-layer spike counts as a failure. Only the sizes, step counts and
// variants are the published ones; weights, thresholds and leak rates are
// arbitrary.
module tb_flexi_neura_workloads;
  tb_workload_net #(.L0(233), .L1(128), .L2(20), .T(70), .N_ACTIVE(40), .P_SPK(25)) shd ();
  tb_workload_net #(.L0(256), .L1(128), .L2(11), .T(80), .N_ACTIVE(40), .P_SPK(25)) dvs ();
  tb_workload_net #(.L0(256), .L1(128), .L2(10), .T(10), .N_ACTIVE(40), .P_SPK(40)) mnist ();

  int checks = 0, failures = 0;

  initial begin
    #2s;
    $display("WATCHDOG timeout");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, f, h, o;
    fork
      begin
        shd.run_all("SHD", c, f, h, o);
      end
    join
    checks += c + 1; failures += f + (h == 0);
    dvs.run_all("DVS", c, f, h, o);
    checks += c + 1; failures += f + (h == 0);
    mnist.run_all("MNIST", c, f, h, o);
    checks += c + 1; failures += f + (h == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
