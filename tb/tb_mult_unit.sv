// Self-checking testbench of mult_unit: random IQ widths and PRB ranges, results
// compared one clock later with PL = 3*w*n + 12 and SB = 3*w*s.
//
// How: 300 random inputs, one per clock, with the expected values pushed into a
// queue and compared when out_valid rises. Timing: 10 ns clock; the result must
// come exactly one clock after the input (the unit's latency). Watchdog:
// 100,000 clocks. The two equations are the paper's; the single-clock latency is
// this design's.
module tb_mult_unit;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  logic [4:0] iq_width;
  logic [9:0] start_prb;
  logic [8:0] num_prb;
  logic [15:0] payload_len, start_byte;

  mult_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w, s, n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      w = (i < 2) ? 16 : 1 + int'($urandom_range(15));
      s = (i == 0) ? 0 : int'($urandom_range(272));
      n = (i == 0) ? 273 : 1 + int'($urandom_range(272 - s));
      @(negedge clk);
      in_valid = 1; iq_width = 5'(w); start_prb = 10'(s); num_prb = 9'(n);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || payload_len != 16'(3*w*n + 12) || start_byte != 16'(3*w*s)) begin
        failures++;
        $display("FAIL w=%0d s=%0d n=%0d: PL=%0d SB=%0d", w, s, n, payload_len, start_byte);
      end
    end
    // paper's MTU example: 30 PRBs of 16-bit IQ give a 1452-byte eCPRI payload
    @(negedge clk); in_valid = 1; iq_width = 16; start_prb = 31; num_prb = 30;
    @(negedge clk); in_valid = 0;
    checks++;
    if (payload_len != 16'd1452 || start_byte != 16'd1488) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
