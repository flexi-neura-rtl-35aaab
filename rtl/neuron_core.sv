// neuron_core: the shared, time-multiplexed neuron datapath of one core.
//
// It holds no state: in each write-back cycle the controller presents one
// neuron's stored state (membrane potential Vm and, for the synaptic model,
// synaptic current Isyn) together with an operation, and the core returns the
// new state, which the CNU writes back to the neuron state memory.
//
//   OP_INTEG / OP_INTEG_SELF  (accumulation unit)
//       LIF/IF:   Vm   <- Vm   + w
//       Synaptic: Isyn <- Isyn + w
//   OP_LEAK  (spike generation / leakage, once per neuron per time step)
//       u = Vm            (LIF/IF)   or   u = Vm + Isyn   (Synaptic)
//       if u >= threshold: spike; Vm <- 0 or u - threshold (reset mechanism)
//       else             : Vm <- beta * u      (coefficient generator)
//       Synaptic:          Isyn <- alpha * Isyn (every step, spike or not)
//       lazy_reset (last step of a sample): Vm, Isyn <- 0
//
// The paper gives the equations (IF/LIF/Synaptic), the ">= threshold, spike
// and reset, otherwise leak" rule, the two reset mechanisms, the lazy reset and
// the use of the coefficient generator for both decays. How Isyn reaches the
// membrane (added at the leak step, so that the stored Vm is already decayed
// and the next step's inputs add to it) and the saturating arithmetic are this
// design's choices. IF is LIF with beta's bypass bit set (DecayRate = 9'h100).
//
// SYNAPTIC (design time) decides whether the synaptic-current path and the
// alpha coefficient generator are built; syn_mode selects it at run time.
// Combinational.
module neuron_core
  import flexi_pkg::*;
#(
  parameter int         V_W        = 8,      // membrane potential width
  parameter int         I_W        = 8,      // synaptic current width
  parameter int         W_W        = 8,      // width of the weight input
  parameter bit         SYNAPTIC   = 1'b0,   // build the synaptic-neuron path
  parameter logic [3:0] SEL_BETA   = 4'b1111,
  parameter logic [3:0] SEL_ALPHA  = 4'b1111
) (
  input  cnu_op_e               op,
  input  logic                  syn_mode,    // run-time model select
  input  logic signed [W_W-1:0] weight,
  input  logic signed [V_W-1:0] vm_in,
  input  logic signed [I_W-1:0] isyn_in,
  input  logic signed [15:0]    threshold,
  input  logic                  reset_sub,
  input  logic        [8:0]     beta_rate,
  input  logic        [8:0]     alpha_rate,
  input  logic                  lazy_reset,
  output logic signed [V_W-1:0] vm_out,
  output logic signed [I_W-1:0] isyn_out,
  output logic                  spike
);

  localparam int XW = 20;   // wide enough for any sum of the inputs above

  function automatic logic signed [V_W-1:0] sat_v(logic signed [XW-1:0] x);
    logic signed [XW-1:0] hi, lo;
    hi = XW'($signed({1'b0, {(V_W-1){1'b1}}}));
    lo = XW'($signed({1'b1, {(V_W-1){1'b0}}}));
    if (x > hi)      return hi[V_W-1:0];
    else if (x < lo) return lo[V_W-1:0];
    else             return x[V_W-1:0];
  endfunction

  function automatic logic signed [I_W-1:0] sat_i(logic signed [XW-1:0] x);
    logic signed [XW-1:0] hi, lo;
    hi = XW'($signed({1'b0, {(I_W-1){1'b1}}}));
    lo = XW'($signed({1'b1, {(I_W-1){1'b0}}}));
    if (x > hi)      return hi[I_W-1:0];
    else if (x < lo) return lo[I_W-1:0];
    else             return x[I_W-1:0];
  endfunction

  logic                  use_syn;
  logic signed [XW-1:0]  w_x, vm_x, is_x, thr_x, u_x;
  logic signed [V_W-1:0] u_sat, u_leak;
  logic signed [I_W-1:0] is_leak;

  assign use_syn = SYNAPTIC && syn_mode;
  assign w_x   = XW'(weight);
  assign vm_x  = XW'(vm_in);
  assign is_x  = XW'(isyn_in);
  assign thr_x = XW'(threshold);
  assign u_x   = use_syn ? vm_x + is_x : vm_x;
  assign u_sat = sat_v(u_x);

  coeff_gen #(.BWI(V_W), .SEL_UNITS(SEL_BETA)) u_cg_beta (
    .in_val(u_sat), .decay_rate(beta_rate), .out_val(u_leak));

  if (SYNAPTIC) begin : g_alpha
    coeff_gen #(.BWI(I_W), .SEL_UNITS(SEL_ALPHA)) u_cg_alpha (
      .in_val(isyn_in), .decay_rate(alpha_rate), .out_val(is_leak));
  end else begin : g_no_alpha
    assign is_leak = isyn_in;
  end

  always_comb begin
    vm_out   = vm_in;
    isyn_out = isyn_in;
    spike    = 1'b0;
    unique case (op)
      OP_INTEG, OP_INTEG_SELF: begin
        if (use_syn) isyn_out = sat_i(is_x + w_x);
        else         vm_out   = sat_v(vm_x + w_x);
      end
      OP_LEAK: begin
        spike = (XW'(u_sat) >= thr_x);
        if (spike) vm_out = reset_sub ? sat_v(XW'(u_sat) - thr_x) : '0;
        else       vm_out = u_leak;
        if (use_syn) isyn_out = is_leak;
        if (lazy_reset) begin
          vm_out   = '0;
          isyn_out = '0;
        end
      end
      default: ;
    endcase
  end

endmodule
