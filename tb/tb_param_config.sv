// Self-checking testbench of param_config: reset defaults, loads, and the
// corrections of out-of-range values.
//
// How: after reset the outputs must equal the prototype's defaults (16-bit IQ,
// numerology 1, 30 PRBs per packet); then 200 random writes, each compared with
// a reference that applies the range rules. Timing: 10 ns clock, result one clock
// after cfg_we. Watchdog: 100,000 clocks. The parameter set follows the paper;
// the range rules are this design's own.
module tb_param_config;
  import sa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  sa_cfg_t cfg_in, cfg, exp;

  param_config dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (cfg.iq_width != 16 || cfg.max_prb_pkt != 30 || cfg.numerology != 1) failures++;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      cfg_in.src_mac = {16'($urandom), 32'($urandom)};
      cfg_in.dst_mac = {16'($urandom), 32'($urandom)};
      cfg_in.iq_width = 5'($urandom);
      cfg_in.numerology = 3'($urandom);
      cfg_in.freq_range = 1'($urandom);
      cfg_in.max_prb_pkt = (i % 7 == 0) ? 9'd0 : 9'($urandom);
      exp = cfg_in;
      if (exp.iq_width == 0 || exp.iq_width > 16) exp.iq_width = 16;
      if (exp.max_prb_pkt == 0) exp.max_prb_pkt = 1;
      if (exp.numerology > 4) exp.numerology = 4;
      cfg_we = (i % 3 != 2);
      if (!cfg_we) exp = cfg;
      @(negedge clk);
      cfg_we = 0;
      checks++;
      if (cfg != exp) begin failures++; $display("FAIL load %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
