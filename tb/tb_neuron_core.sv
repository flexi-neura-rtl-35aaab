// tb_neuron_core: random operations on the neuron datapath (synaptic model
// built, 9-bit potential, 8-bit current), each compared with the reference
// model: integration into Vm (LIF) or Isyn (synaptic), threshold test with
// both reset mechanisms, beta/alpha leak, lazy reset and saturation.
//
// The datapath is combinational (it sits in the write-back cycle of the CNU),
// so each result is checked after a settling delay. The equations, reset
// mechanisms and the >= threshold rule follow the published design; the
// saturation and the order of the synaptic update are this design's and are
// mirrored by the reference. A watchdog bounds the run.
module tb_neuron_core;
  import flexi_pkg::*;
  import tb_ref_pkg::*;

  localparam int VW = 9, IW = 8;
  int checks = 0, failures = 0;
  int n_spike = 0, n_leak = 0;

  cnu_op_e op;
  logic syn_mode, reset_sub, lazy;
  logic signed [15:0] w, thr;
  logic signed [VW-1:0] vm, vm_o;
  logic signed [IW-1:0] is, is_o;
  logic [8:0] beta, alpha;
  logic spike;

  neuron_core #(.V_W(VW), .I_W(IW), .W_W(16), .SYNAPTIC(1'b1)) dut (
    .op, .syn_mode, .weight(w), .vm_in(vm), .isyn_in(is), .threshold(thr),
    .reset_sub, .beta_rate(beta), .alpha_rate(alpha), .lazy_reset(lazy),
    .vm_out(vm_o), .isyn_out(is_o), .spike);

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: op=%s syn=%0d vm=%0d is=%0d w=%0d thr=%0d got %0d exp %0d",
               what, op.name(), syn_mode, vm, is, w, thr, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int evm, eis, u;
      bit esp;
      op = (i % 3 == 0) ? OP_INTEG : OP_LEAK;
      syn_mode  = 1'($urandom);
      reset_sub = 1'($urandom);
      lazy      = ($urandom % 8) == 0;
      w   = 16'(sext($urandom, 6));
      thr = 16'($urandom % 200);
      vm  = VW'($urandom);
      is  = IW'($urandom);
      beta  = 9'($urandom);
      alpha = 9'($urandom);
      #1;
      evm = int'(vm); eis = int'(is); esp = 0;
      if (op == OP_INTEG) begin
        if (syn_mode) eis = sat_ref(eis + int'(w), IW);
        else          evm = sat_ref(evm + int'(w), VW);
      end else begin
        u = syn_mode ? sat_ref(evm + eis, VW) : evm;
        esp = (u >= int'(thr));
        if (esp) evm = reset_sub ? sat_ref(u - int'(thr), VW) : 0;
        else     evm = cg_ref(u, int'(beta), VW);
        if (syn_mode) eis = cg_ref(eis, int'(alpha), IW);
        if (lazy) begin evm = 0; eis = 0; end
        if (esp) n_spike++; else n_leak++;
      end
      chk(int'(vm_o), evm, "vm");
      chk(int'(is_o), eis, "isyn");
      chk(int'(spike), int'(esp), "spike");
    end
    if (n_spike == 0 || n_leak == 0) begin
      failures++;
      $display("FAIL: spike/leak paths not both exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
