// Self-checking testbench of symbol_buffer at a reduced depth of 16: random
// writes and pops against a reference queue, including overflow.
//
// How: 3000 clocks of random writes and pops, mirrored in a queue; head, valid,
// count and the overflow flag are compared every clock. Timing: 10 ns clock.
// Watchdog: 100,000 clocks. The depth of 512 is the paper's (reduced here to
// reach full quickly); losing a write to a full buffer is this design's rule.
module tb_symbol_buffer;
  import sa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int D = 16;
  logic wr_en = 0, rd_pop = 0, head_valid, overflow;
  pkt_info_t wr_data, head;
  logic [4:0] count;

  symbol_buffer #(.DEPTH(D)) dut (.*);

  pkt_info_t q[$];
  int ovf_seen = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_ovf;
    wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // phases: fill hard, then drain hard, then mixed
      wr_en  = ((i / 200) % 3 == 0) ? ($urandom_range(9) < 8) :
               ((i / 200) % 3 == 1) ? ($urandom_range(9) < 2) : 1'($urandom);
      rd_pop = ((i / 200) % 3 == 0) ? ($urandom_range(9) < 2) :
               ((i / 200) % 3 == 1) ? ($urandom_range(9) < 8) : 1'($urandom);
      wr_data = pkt_info_t'({$urandom, $urandom, $urandom});
      #1;
      checks++;
      if (head_valid != (q.size() > 0) || count != 5'(q.size()) ||
          (q.size() > 0 && head != q[0])) begin
        failures++; $display("FAIL state at %0d: count=%0d ref=%0d", i, count, q.size());
      end
      exp_ovf = wr_en && q.size() == D && !(rd_pop && q.size() > 0);
      if (overflow != exp_ovf) begin failures++; $display("FAIL overflow flag at %0d", i); end
      if (overflow) ovf_seen++;
      @(posedge clk);
      if (rd_pop && q.size() > 0) void'(q.pop_front());
      if (wr_en && !exp_ovf) q.push_back(wr_data);
    end
    checks++;
    if (ovf_seen == 0) begin failures++; $display("FAIL overflow never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
