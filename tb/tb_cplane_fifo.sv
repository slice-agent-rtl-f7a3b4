// Self-checking testbench of cplane_fifo at a reduced depth of 8: decoder writes,
// reinsertions (pop of the head written back to the tail), decoder priority on
// the write port, and discarding of decoder records when full, all against a
// reference queue.
//
// How: random decoder writes and write-back requests each clock, mirrored in a
// SystemVerilog queue; head, count, full, drop and drop_count are compared every
// clock. Timing: 10 ns clock, 4000 random clocks. Watchdog: 100,000 clocks.
// The discard-when-full rule is the paper's; decoder priority over write-backs
// is this design's own choice and is checked as such.
module tb_cplane_fifo;
  import sa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int D = 8;
  logic wr_en = 0, reins_en = 0, reins_ready, rd_pop = 0, head_valid, new_entry, drop;
  sched_rec_t wr_data, reins_data, head;
  logic [3:0] count;
  logic [15:0] drop_count;

  cplane_fifo #(.DEPTH(D)) dut (.*);

  sched_rec_t q[$];
  int drops = 0, reins_done = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit do_reins, exp_drop;
    sched_rec_t h;
    wr_data = '0; reins_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(9) < ((i / 500) % 2 ? 3 : 7));
      wr_data = sched_rec_t'({$urandom, $urandom, $urandom});
      do_reins = (q.size() > 0) && $urandom_range(1);
      reins_data = head;
      #1;
      reins_en = do_reins && reins_ready;       // a reinsertion waits for a free port
      rd_pop   = reins_en || ((q.size() > 0) && $urandom_range(3) == 0);
      #1;
      checks++;
      if (reins_ready != !wr_en) begin failures++; $display("FAIL priority at %0d", i); end
      if (head_valid != (q.size() > 0) || count != 4'(q.size()) ||
          (q.size() > 0 && head != q[0])) begin
        failures++; $display("FAIL state at %0d count=%0d ref=%0d", i, count, q.size());
      end
      exp_drop = wr_en && (q.size() == D) && !rd_pop;
      if (drop != exp_drop || new_entry != (wr_en && !exp_drop)) begin
        failures++; $display("FAIL drop flag at %0d", i);
      end
      @(posedge clk);
      h = (q.size() > 0) ? q[0] : '0;
      if (rd_pop && q.size() > 0) void'(q.pop_front());
      if (wr_en && !exp_drop) q.push_back(wr_data);
      else if (reins_en) begin q.push_back(h); reins_done++; end
      if (exp_drop) drops++;
    end
    @(negedge clk);
    reins_en = 0; rd_pop = 0; wr_en = 0;
    checks++;
    if (drop_count != 16'(drops) || drops == 0 || reins_done == 0) begin
      failures++; $display("FAIL drop_count %0d ref %0d reinsertions %0d", drop_count, drops, reins_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
