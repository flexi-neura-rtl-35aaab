// coeff_gen: multiplier-free leak coefficient generator.
//
// Multiplies a signed value IN by a decay factor k/256 using only shifts and
// adds. DecayRate[7:0] selects the partial products IN>>1 .. IN>>8 (bit 7 =
// shift by 1, bit 0 = shift by 8) and DecayRate[8] selects an unshifted
// bypass (factor 1, used for IF neurons). The partial products are grouped in
// pairs into Selection Units 1-4 ((1,2), (3,4), (5,6), (7,8)), each with one
// adder, and the unit outputs plus the bypass are summed by a tree adder.
// All of this structure follows the paper's coefficient-generator figure.
//
// SEL_UNITS[i] decides at elaboration whether Selection Unit i+1 is built;
// a unit that is not built contributes zero. (That bit i maps to unit i+1 is
// this design's reading of the figure's SelectionUnits[3:0] input.)
//
// Signed handling is this design's choice: the shifts are applied to |IN| and
// the sign restored afterwards, so out(-x) = -out(x) and small negative values
// decay to zero like positive ones. If the bypass and other paths are enabled
// together the sum can exceed the input range; it saturates.
//
// Purely combinational; no clock.
module coeff_gen #(
  parameter int         BWI       = 8,        // width of IN and OUT
  parameter logic [3:0] SEL_UNITS = 4'b1111   // build Selection Units 4..1
) (
  input  logic signed [BWI-1:0] in_val,
  input  logic        [8:0]     decay_rate,
  output logic signed [BWI-1:0] out_val
);

  localparam int SW = BWI + 2;                 // room for the sum of 5 paths
  localparam logic [BWI-1:0] MAX_MAG = {1'b0, {(BWI-1){1'b1}}};

  logic [BWI-1:0] mag;
  logic [SW-1:0]  unit_sum [4];
  logic [SW-1:0]  bypass;
  logic [SW-1:0]  total;
  logic [BWI-1:0] mag_out;

  // Magnitude; the most negative value is clamped to the largest positive.
  always_comb begin
    if (in_val < 0) mag = (in_val == {1'b1, {(BWI-1){1'b0}}}) ? MAX_MAG : BWI'(-in_val);
    else            mag = BWI'(in_val);
  end

  assign bypass = decay_rate[8] ? SW'(mag) : '0;

  // Selection Unit u (1..4) adds IN>>(2u-1) and IN>>(2u), gated by
  // DecayRate[9-2u] and DecayRate[8-2u].
  for (genvar u = 0; u < 4; u++) begin : g_unit
    if (SEL_UNITS[u]) begin : g_built
      logic [SW-1:0] p_hi, p_lo;
      assign p_hi = decay_rate[7-2*u] ? SW'(mag >> (2*u+1)) : '0;
      assign p_lo = decay_rate[6-2*u] ? SW'(mag >> (2*u+2)) : '0;
      assign unit_sum[u] = p_hi + p_lo;
    end else begin : g_omitted
      assign unit_sum[u] = '0;
    end
  end

  // Tree adder.
  assign total = (bypass + unit_sum[0]) + (unit_sum[1] + (unit_sum[2] + unit_sum[3]));

  assign mag_out = (total > SW'(MAX_MAG)) ? MAX_MAG : total[BWI-1:0];
  assign out_val = (in_val < 0) ? -$signed(mag_out) : $signed(mag_out);

endmodule
