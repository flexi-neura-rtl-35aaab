// tb_ref_pkg: reference arithmetic for the testbenches.
//
// Written independently of the RTL: plain integer arithmetic on int values.
//   cg_ref    decay by DecayRate: sum over set bits b (7..0) of floor(|x| / 2^(8-b))
//             plus |x| for bit 8, clamped to the largest magnitude, sign restored
//   sat_ref   clamp to a signed width
//   layer_step one time step of one layer in the hardware's update order
//
// It has no timing: layer_step gives the state and spikes after one whole
// time step, in the hardware's order (feedforward, then recurrent ASCLs of the
// previous step, then the sweep). The equations are the published ones; the
// saturation, the magnitude-based decay and the update order are the choices
// of this RTL, which the reference copies so that results match bit for bit.
package tb_ref_pkg;

  function automatic int sat_ref(int x, int w);
    int hi = (1 << (w - 1)) - 1;
    int lo = -(1 << (w - 1));
    return (x > hi) ? hi : (x < lo) ? lo : x;
  endfunction

  function automatic int cg_ref(int x, int rate, int w, int sel_units = 15);
    int mag, acc, maxmag;
    maxmag = (1 << (w - 1)) - 1;
    mag = (x < 0) ? -x : x;
    if (mag > maxmag) mag = maxmag;
    acc = (rate >> 8) & 1 ? mag : 0;
    for (int s = 1; s <= 8; s++) begin
      int unit = (s - 1) / 2;              // selection unit 1..4 -> 0..3
      if (((rate >> (8 - s)) & 1) && ((sel_units >> unit) & 1))
        acc += mag / (1 << s);
    end
    if (acc > maxmag) acc = maxmag;
    return (x < 0) ? -acc : acc;
  endfunction

  // Sign-extend the low w bits of v.
  function automatic int sext(int v, int w);
    v = v & ((1 << w) - 1);
    return (v >= (1 << (w - 1))) ? v - (1 << w) : v;
  endfunction

  typedef struct {
    int  n;            // neurons
    int  vw, iw;       // widths
    bit  syn;          // synaptic model
    bit  rec;          // recurrent
    bit  ata_t;        // all-to-all true (else ATA-F)
    int  ataf_w;
    int  thr;
    bit  reset_sub;
    int  beta, alpha;
  } layer_cfg_t;

  // One time step. ff_w[s][n], rec_w[s][n]; vm/is: state; in_spk: source
  // addresses in arrival order; rec_in: ASCLs from the previous step.
  // Returns the spikes of this step (in neuron order) in out_spk and the
  // ASCLs for the next step in rec_out.
  function automatic void layer_step(input layer_cfg_t c, input int ff_w[][],
      input int rec_w[][], ref int vm[], ref int is[], input int in_spk[$],
      input int rec_in[$], input bit last, output int out_spk[$],
      output int rec_out[$]);
    out_spk = {};
    rec_out = {};
    foreach (in_spk[k])
      for (int j = 0; j < c.n; j++)
        if (c.syn) is[j] = sat_ref(is[j] + ff_w[in_spk[k]][j], c.iw);
        else       vm[j] = sat_ref(vm[j] + ff_w[in_spk[k]][j], c.vw);
    if (c.rec)
      foreach (rec_in[k]) begin
        if (c.ata_t) begin
          for (int j = 0; j < c.n; j++)
            if (c.syn) is[j] = sat_ref(is[j] + rec_w[rec_in[k]][j], c.iw);
            else       vm[j] = sat_ref(vm[j] + rec_w[rec_in[k]][j], c.vw);
        end else begin
          int j = rec_in[k];
          if (c.syn) is[j] = sat_ref(is[j] + c.ataf_w, c.iw);
          else       vm[j] = sat_ref(vm[j] + c.ataf_w, c.vw);
        end
      end
    for (int j = 0; j < c.n; j++) begin
      int u = c.syn ? sat_ref(vm[j] + is[j], c.vw) : vm[j];
      if (u >= c.thr) begin
        out_spk.push_back(j);
        if (c.rec && !last) rec_out.push_back(j);
        vm[j] = c.reset_sub ? sat_ref(u - c.thr, c.vw) : 0;
      end else begin
        vm[j] = cg_ref(u, c.beta, c.vw);
      end
      if (c.syn) is[j] = cg_ref(is[j], c.alpha, c.iw);
      if (last) begin
        vm[j] = 0;
        is[j] = 0;
      end
    end
  endfunction

endpackage
