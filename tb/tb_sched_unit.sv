// Self-checking testbench of sched_unit (type "2", FIFO reduced to 16 records):
// records for the coming slot and for later slots arrive mixed, some while the
// unit is writing records back; records beyond the FIFO capacity are discarded.
// Checks that every record due is written exactly once with the right packets,
// that the others stay in the FIFO, and that the drop count matches the model.
//
// How: records are written on the decoder port at random times while next_slot
// and swap are driven as by the control unit; packet writes are collected from
// sym_wr/pkt and matched against a model. Timing: 10 ns clock; the exact clock
// counts of a run are checked in the scheduling-process test. Watchdog:
// 100,000 clocks. Write-back and discard are the paper's rules; the pass
// trigger is this design's.
module tb_sched_unit;
  import sa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int D = 16;
  logic wr_en = 0, swap = 0, drop, busy, slice_done, reinsert;
  sched_rec_t wr_data;
  slot_id_t next_slot;
  pkt_info_t pkt;
  logic [NUM_SYMBOLS-1:0] sym_wr;
  logic [4:0] fifo_count;
  logic [15:0] drop_count;

  sched_unit #(.SLICE_TYPE(2), .FIFO_DEPTH(D)) dut (
    .clk, .rst_n, .wr_en, .wr_data, .next_slot, .swap, .max_prb_pkt(9'd30),
    .pkt, .sym_wr, .wr_ready(1'b1), .fifo_count, .drop, .drop_count, .busy,
    .slice_done, .reinsert);

  int got_pkts [int];     // eaxc -> packets written
  int n_reins = 0;
  always @(posedge clk) if (rst_n) begin
    if (sym_wr != 0) begin
      if (got_pkts.exists(int'(pkt.eaxc_id))) got_pkts[int'(pkt.eaxc_id)]++;
      else got_pkts[int'(pkt.eaxc_id)] = 1;
      if (pkt.slot != next_slot) begin failures++; $display("FAIL wrote a record of another slot"); end
    end
    if (reinsert) n_reins++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    slot_id_t s0, s1;
    int exp_pkts [int];
    int kept, sent, drops;
    s0 = '{frame: 8'd9, subframe: 4'd0, slot: 6'd1};
    s1 = '{frame: 8'd9, subframe: 4'd1, slot: 6'd0};
    next_slot = s0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    kept = 0; sent = 0;
    // 21 records, one every 3 clocks: 2 of 3 for s1 (kept), 1 of 3 for s0 (sent)
    for (int i = 0; i < 21; i++) begin
      @(negedge clk);
      wr_en = 1;
      wr_data = '0;
      wr_data.eaxc_id = 16'(1000 + i);
      wr_data.slot = (i % 3 == 0) ? s0 : s1;
      wr_data.start_prb = 10'(i);
      wr_data.num_prb = 9'(1 + i * 3);
      wr_data.start_sym = 4'(i % 14);
      wr_data.num_sym = 1;
      if (i % 3 == 0) exp_pkts[1000 + i] = (1 + i * 3 + 29) / 30;
      @(negedge clk); wr_en = 0;
      @(negedge clk);
    end
    repeat (200) @(negedge clk);
    checks++;
    if (fifo_count != 14 || n_reins == 0) begin
      failures++; $display("FAIL after slot s0: %0d records kept, %0d write-backs", fifo_count, n_reins);
    end
    foreach (exp_pkts[id]) begin
      checks++;
      if (!got_pkts.exists(id) || got_pkts[id] != exp_pkts[id]) begin
        failures++; $display("FAIL slice %0d packets", id);
      end
    end
    // two more s1 records fill the FIFO; the three after them are discarded
    drops = int'(drop_count);
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); wr_en = 1; wr_data.eaxc_id = 16'(2000 + i); wr_data.slot = s1;
      @(negedge clk); wr_en = 0;
      repeat (40) @(negedge clk);
    end
    checks++;
    if (int'(drop_count) != drops + 3) begin failures++; $display("FAIL drop count %0d", drop_count); end
    // slot swap: all 16 kept records are due now
    got_pkts.delete();
    @(negedge clk); next_slot = s1; swap = 1;
    @(negedge clk); swap = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (fifo_count != 0 || got_pkts.size() != 16) begin
      failures++; $display("FAIL after swap: %0d left, %0d slices written", fifo_count, got_pkts.size());
    end
    checks++;
    if (!got_pkts.exists(2001) || got_pkts.exists(2002)) begin failures++; $display("FAIL wrong records kept"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
