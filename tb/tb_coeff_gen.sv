// tb_coeff_gen: checks the coefficient generator against integer division,
// including the paper's example (k = 153, DecayRate = 9'b010011001), the
// bypass bit, sign symmetry, saturation and a build with units omitted.
//
// The generator is combinational, so values are checked after a settling
// delay; there is no latency to check. The DecayRate encoding and the shift
// pairs follow the published design; magnitude arithmetic and the clamp are
// this design's and are what the reference assumes. A watchdog bounds the run.
module tb_coeff_gen;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic signed [7:0] x;
  logic [8:0] rate;
  logic signed [7:0] y_full, y_part;

  coeff_gen #(.BWI(8), .SEL_UNITS(4'b1111)) dut (.in_val(x), .decay_rate(rate), .out_val(y_full));
  coeff_gen #(.BWI(8), .SEL_UNITS(4'b0101)) dut_part (.in_val(x), .decay_rate(rate), .out_val(y_part));

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: x=%0d rate=%h got %0d exp %0d", what, x, rate, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // paper example: 0.59765625 = 1/2 + 1/16 + 1/32 + 1/256
    x = 8'sd100; rate = 9'b010011001; #1;
    check(y_full, 50 + 6 + 3 + 0, "k=153 example");
    x = -8'sd100; #1;
    check(y_full, -59, "k=153 negative");
    x = 8'sd77; rate = 9'h100; #1;
    check(y_full, 77, "bypass");
    x = 8'sd127; rate = 9'h1FF; #1;
    check(y_full, 127, "saturation");
    x = -8'sd128; rate = 9'h080; #1;
    check(y_full, -63, "most negative");
    for (int i = 0; i < 2000; i++) begin
      x = 8'($urandom);
      rate = 9'($urandom);
      #1;
      check(y_full, cg_ref(int'(x), int'(rate), 8), "random full");
      check(y_part, cg_ref(int'(x), int'(rate), 8, 5), "random partial");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
