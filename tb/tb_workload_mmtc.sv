// Workload testbench: the massive machine-type (mMTC) load on the full-size
// Slice Agent, with 600 and 1200 one-PRB slices per slot.
//
// How: three loads are run, each over three target slots. In the first two
// (600 and 1200 slices per slot) every slice's C-plane message gets a random
// send time within the two slots before its target, as when DUs send their
// scheduling early and out of order. In the third, all 1200 messages of a slot
// arrive early, in the first quarter of the slot two before the target, so the
// whole slot's records must wait in the FIFO at once. The messages are sent in
// time order, one byte per clock. All slices are type "2" (the slice list is empty).
// Slice j of a slot uses symbol j mod 14 and PRB j / 14. A behavioural low PHY
// serves the IQ bytes; the testbench keeps the set of expected frames.
// Checks, per load: every accepted slice yields exactly one frame of the right
// slot, symbol, PRB and length, no frame is unexpected, no entry is late or
// lost in a symbol buffer, every discarded record is one the testbench sent
// (sent = frames + discarded), and the type "2" FIFO never holds more than its
// 1024 records. When all records of a slot arrive early, exactly those beyond
// 1024 must be discarded (176 per slot for 1200 slices), which is the overflow
// the published evaluation shows; a failure is also counted if no load
// overflows the FIFO. With arrivals spread over two slots, the records for the
// next slot are consumed as they arrive (each new record starts a pass), so the
// occupancy stays far lower; the peak and the discarded share are printed.
// Timing: 10 ns clock, symbol period 8000 clocks (slot 112,000 clocks); a frame
// must start within its own symbol period. Watchdog: three times a load's
// length plus three slots. The load sizes are the paper's; the slice placement, the arrival model
// and the symbol period are this testbench's.
module tb_workload_mmtc;
  import sa_pkg::*;
  import tb_oran_pkg::*;

  localparam int SYM_CYC  = 8000;
  localparam int SLOT_CYC = 14 * SYM_CYC;
  localparam int TARGETS  = 3;                 // target slots 2, 3, 4
  localparam int RUN_SLOTS = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]  cp_tdata = 0;
  logic        cp_tvalid = 0, cp_tlast = 0, cp_tready;
  logic        cfg_we = 0, slice_add = 0, slice_remove = 0, slice_add_fail;
  sa_cfg_t     cfg_in = CFG_DEFAULT;
  logic [15:0] slice_id = 0;
  logic [5:0]  n_type1_slices;
  logic [7:0]  frame_id;
  logic [3:0]  subframe_id, symbol_id;
  logic [5:0]  slot_id;
  logic        phy_start, phy_tvalid, phy_tready;
  logic [15:0] phy_start_byte;
  logic [7:0]  phy_tdata;
  logic [7:0]  eth_tdata;
  logic        eth_tvalid, eth_tlast, eth_tready;
  logic [10:0] t1_fifo_count, t2_fifo_count;
  logic [15:0] t1_drop_count, t2_drop_count, symbuf_overflow_count, late_drop_count, reject_count;
  logic [31:0] pkt_sent_count, slices_done_count, reinsert_count;
  sa_cfg_t     cfg_rd;
  logic [3:0]  symb_sel, next_symbol;
  logic [1:0]  sched_busy, fifo_drop;
  logic [9:0]  symbuf_count [NUM_SYMBOLS];

  slice_agent dut (.*);

  // time base, restarted with each load
  int cyc = 0;
  always @(posedge clk) cyc <= rst_n ? cyc + 1 : 0;
  int k_now;
  assign k_now       = cyc / SLOT_CYC;
  assign symbol_id   = 4'((cyc % SLOT_CYC) / SYM_CYC);
  assign slot_id     = 6'(k_now % 2);
  assign subframe_id = 4'((k_now / 2) % 10);
  assign frame_id    = 8'(k_now / 20);

  // behavioural low PHY
  int   phy_off = 0, phy_sym = 0;
  logic phy_on = 0;
  always @(posedge clk) begin
    if (phy_start) begin
      phy_off <= int'(phy_start_byte);
      phy_sym <= int'(dut.u_encap.sym_q);
      phy_on  <= 1;
    end else if (phy_tvalid && phy_tready) phy_off <= phy_off + 1;
  end
  assign phy_tvalid = phy_on;
  assign phy_tdata  = phy_byte(phy_sym, phy_off);
  assign eth_tready = 1'b1;

  // expected frames: key slot/symbol/eAxC
  bit exp_db [string];
  int frames = 0, bad = 0, fr_len = 0, fr_start = 0, peak = 0;
  byte unsigned hdr [34];
  function automatic string key(input int k, input int sym, input int eaxc);
    return $sformatf("%0d/%0d/%0h", k, sym, eaxc);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (int'(t2_fifo_count) > peak) peak = int'(t2_fifo_count);
    if (eth_tvalid) begin
      if (fr_len == 0) fr_start = cyc;
      if (fr_len < 34) hdr[fr_len] = eth_tdata;
      fr_len++;
      if (eth_tlast) begin
        check_frame();
        fr_len = 0;
      end
    end
  end

  task automatic check_frame();
    int eaxc, k, sym, sp, np;
    string kk;
    bit ok;
    eaxc = {hdr[22], hdr[23]};
    k = hdr[27] * 20 + (hdr[28] >> 4) * 2 + (((hdr[28] & 15) << 2) | (hdr[29] >> 6));
    sym = hdr[29] & 15;
    sp = ((hdr[31] & 3) << 8) | hdr[32];
    np = hdr[33];
    kk = key(k, sym, eaxc);
    ok = exp_db.exists(kk) && np == 1 && fr_len == 34 + 48 && sp == ((eaxc - 16'h1000) / 14) &&
         fr_start >= k * SLOT_CYC + sym * SYM_CYC && fr_start <= k * SLOT_CYC + (sym + 1) * SYM_CYC + 8;
    if (ok) exp_db.delete(kk);
    frames++;
    if (!ok) begin
      bad++;
      if (bad < 10) $display("FAIL frame %s len %0d at clock %0d", kk, fr_len, fr_start);
    end
  endtask

  task automatic send_msg(input tb_section_t s);
    byte unsigned m[$];
    tb_section_t one[$];
    one.push_back(s);
    build_msg(m, one);
    foreach (m[i]) begin
      @(negedge clk);
      cp_tdata = m[i]; cp_tvalid = 1; cp_tlast = (i == m.size() - 1);
    end
    @(negedge clk); cp_tvalid = 0; cp_tlast = 0;
  endtask

  typedef struct { int t; int k; int j; } ev_t;

  task automatic run_load(input int n_slices, input bit early);
    ev_t ev[$];
    int sent, n_lost_frames;
    tb_section_t s;
    exp_db.delete();
    frames = 0; bad = 0; peak = 0; fr_len = 0;
    rst_n = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // random arrival within the two slots before each target slot
    for (int k = 2; k < 2 + TARGETS; k++)
      for (int j = 0; j < n_slices; j++) begin
        ev_t e;
        if (early) e.t = (k - 2) * SLOT_CYC + int'($urandom_range(SLOT_CYC / 4));
        else       e.t = (k - 2) * SLOT_CYC + int'($urandom_range(2 * SLOT_CYC - 2 * SYM_CYC));
        e.k = k; e.j = j;
        ev.push_back(e);
      end
    ev.sort() with (item.t);
    sent = 0;
    foreach (ev[i]) begin
      int f, sf, sl;
      while (cyc < ev[i].t) @(negedge clk);
      f = ev[i].k / 20; sf = (ev[i].k / 2) % 10; sl = ev[i].k % 2;
      s.eaxc = 16'h1000 + ev[i].j; s.frame = f; s.subframe = sf; s.slot = sl;
      s.start_sym = ev[i].j % 14; s.num_sym = 1; s.section_id = ev[i].j;
      s.start_prb = ev[i].j / 14; s.num_prb = 1;
      exp_db[key(ev[i].k, s.start_sym, s.eaxc)] = 1;
      send_msg(s);
      sent++;
    end
    while (k_now < RUN_SLOTS) @(negedge clk);

    n_lost_frames = exp_db.size();
    $display("load %0d slices/slot, %s: %0d sent, %0d frames, %0d discarded (%0.2f%%), peak FIFO %0d",
             n_slices, early ? "all early" : "spread over two slots", sent, frames, t2_drop_count, 100.0 * t2_drop_count / sent, peak);
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d bad frames", bad); end
    checks++;
    if (frames + int'(t2_drop_count) != sent || n_lost_frames != int'(t2_drop_count)) begin
      failures++;
      $display("FAIL accounting: sent %0d, frames %0d, discarded %0d, missing %0d",
               sent, frames, t2_drop_count, n_lost_frames);
    end
    checks++;
    if (late_drop_count != 0 || symbuf_overflow_count != 0 || reject_count != 0 || peak > 1024) begin
      failures++; $display("FAIL late %0d, buffer overflow %0d, rejected %0d, peak %0d",
                           late_drop_count, symbuf_overflow_count, reject_count, peak);
    end
    // all records of a slot queued before their slot: exactly those beyond the
    // FIFO's 1024 entries are discarded, for each target slot
    checks++;
    if (early && int'(t2_drop_count) != TARGETS * ((n_slices > 1024) ? n_slices - 1024 : 0)) begin
      failures++; $display("FAIL %0d discarded, expected %0d", t2_drop_count,
                           TARGETS * ((n_slices > 1024) ? n_slices - 1024 : 0));
    end
    if (t2_drop_count != 0) n_overflow_loads++;
  endtask

  initial begin
    repeat (3 * (RUN_SLOTS + 1) * SLOT_CYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_overflow_loads = 0;
  initial begin
    run_load(600, 0);
    run_load(1200, 0);
    run_load(1200, 1);
    checks++;
    if (n_overflow_loads == 0) begin failures++; $display("FAIL the FIFO never overflowed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
