// tb_config_regs: writes every configuration register and checks the cfg
// fields, the reset values, the core-number match and that a core that is
// not selected ignores every register except the core number.
//
// Interface driven: the write strobe, register index and data as the SPI
// slave presents them; a write takes effect at the next clock edge, which is
// checked. Register names follow the published design; indices, widths and
// reset values are this design's. A watchdog bounds the run.
module tb_config_regs;
  import flexi_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [18:0] wr_idx = 0;
  logic [22:0] wr_data = 0;
  cfg_t cfg;
  logic active;

  config_regs #(.CORE_ID(8'd2), .N(100), .DEF_RECURRENT(1'b1)) dut (.*);

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0h exp %0h", what, got, exp);
    end
  endtask

  task automatic wr(cfg_reg_e r, logic [22:0] d);
    @(negedge clk); wr_en = 1; wr_idx = 19'(r); wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(cfg.neuron_number, 100, "reset neuron number");
    chk(cfg.recurrent, 1, "reset recurrent");
    chk(cfg.beta_rate, 9'h100, "reset beta");
    chk(active, 0, "inactive after reset");
    wr(REG_THRESHOLD, 23'd40);
    chk(cfg.threshold, 0, "write ignored while inactive");
    wr(REG_CORE_NUMBER, 23'd2);
    chk(active, 1, "active");
    wr(REG_ACTIVITY_EN, 1);     chk(cfg.activity_en, 1, "activity");
    wr(REG_NEURON_NUMBER, 77);  chk(cfg.neuron_number, 77, "neuron number");
    wr(REG_FF_RECURRENT, 0);    chk(cfg.recurrent, 0, "recurrent");
    wr(REG_NEURON_MODEL, 1);    chk(cfg.synaptic, 1, "model");
    wr(REG_TIME_STEP, 70);      chk(cfg.time_step, 70, "time step");
    wr(REG_ALL_TO_ALL, 1);      chk(cfg.all_to_all, 1, "all to all");
    wr(REG_ATAF_WEIGHT, 23'hFFFD); chk($unsigned(cfg.ataf_weight), 16'hFFFD, "ataf weight");
    wr(REG_THRESHOLD, 40);      chk(cfg.threshold, 40, "threshold");
    wr(REG_RESET_MECH, 1);      chk(cfg.reset_sub, 1, "reset mechanism");
    wr(REG_BETA_RATE, 9'h099);  chk(cfg.beta_rate, 9'h099, "beta");
    wr(REG_ALPHA_RATE, 9'h0C0); chk(cfg.alpha_rate, 9'h0C0, "alpha");
    wr(REG_CORE_NUMBER, 5);
    chk(active, 0, "deselected");
    wr(REG_THRESHOLD, 9);       chk(cfg.threshold, 40, "kept while deselected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
