// End-to-end testbench of the Slice Agent at its default sizes (1024-record
// C-plane FIFOs, 512-entry symbol buffers, 32-entry slice list).
//
// The testbench plays the O-RU around the agent: a time base (slot of 14
// symbols of SYM_CYC clocks, numerology 1), the DUs' C-plane messages, a
// behavioural uplink low PHY and the Ethernet side. Over six slots it sends:
//   slot 0: for slot 1, four URLLC slices of 30 PRBs listed as type "1", twenty
//           one-PRB mMTC slices, a 61-PRB slice over symbols 0-1 and an 11-PRB
//           slice over symbols 0-3 (type "2"); early type "2" slices for slots
//           2 and 3 (written back until due) and, last, a type "1" slice for slot 2
//           that waits at the head of the type "1" FIFO (its numPrb of 0
//           meaning all PRBs up to the carrier's last);
//   slot 1: for slot 2, URLLC and mMTC slices plus eight 30-PRB slices in
//           symbol 13, more than one symbol period can carry;
//   slot 2: for slot 3, URLLC and mMTC slices;
//   slot 3: 1100 one-PRB messages for a distant slot, overflowing the type
//           "2" FIFO, interleaved with URLLC messages for slot 4.
// Every frame leaving the agent is checked byte by byte against one built here
// from the slice it belongs to, and for starting within the period of its own
// slot and symbol (the data of slot n leaves during slot n, after being
// scheduled during slot n-1). Every expected frame must arrive, except the
// symbol-13 frames of slot 2 that did not fit, which must be reported as late.
// The testbench counts each mechanism of the design (type "1"/"2" routing,
// write-back, type "1" waiting, write collision of the units, FIFO overflow,
// multi-packet slices, multi-symbol slices, slot swaps, stages 2 and 3 working
// at once, late discards) and
// counts a failure for any that never happened.
module tb_slice_agent;
  import sa_pkg::*;
  import tb_oran_pkg::*;

  localparam int SYM_CYC  = 8000;
  localparam int SLOT_CYC = 14 * SYM_CYC;
  localparam int N_SLOTS  = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- DUT ----------------
  logic [7:0]  cp_tdata = 0;
  logic        cp_tvalid = 0, cp_tlast = 0, cp_tready;
  logic        cfg_we = 0, slice_add = 0, slice_remove = 0, slice_add_fail;
  sa_cfg_t     cfg_in;
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

  // ---------------- time base ----------------
  int cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;
  int k_now, sym_now;
  assign k_now   = cyc / SLOT_CYC;
  assign sym_now = (cyc % SLOT_CYC) / SYM_CYC;
  assign symbol_id   = 4'(sym_now);
  assign slot_id     = 6'(k_now % 2);
  assign subframe_id = 4'((k_now / 2) % 10);
  assign frame_id    = 8'(k_now / 20);

  function automatic void slot_of(input int k, output int f, output int sf, output int sl);
    f = (k / 20) % 256; sf = (k / 2) % 10; sl = k % 2;
  endfunction

  // ---------------- behavioural low PHY ----------------
  // Keeps the whole symbol available and streams it from the requested start
  // byte; the symbol is the one the agent is encapsulating.
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

  // ---------------- expected frames ----------------
  typedef struct { int k, sym, eaxc, sect, sp, np; bit overload; } exp_pkt_t;
  exp_pkt_t exp_db [string];
  bit       seen_db [string];
  int       multi_pkt_slices = 0, multi_sym_slices = 0;

  function automatic string key(input int k, input int sym, input int eaxc, input int sp);
    return $sformatf("%0d/%0d/%0h/%0d", k, sym, eaxc, sp);
  endfunction

  // Registers a slice: the frames it must produce with 30 PRBs per packet.
  function automatic void expect_slice(input int k, input tb_section_t s, input bit overload = 0);
    int left, sp, n, np;
    np = (s.num_prb == 0) ? 273 - s.start_prb : s.num_prb;
    if (np > 30) multi_pkt_slices++;
    if (s.num_sym > 1) multi_sym_slices++;
    for (int sym = s.start_sym; sym < s.start_sym + s.num_sym && sym < 14; sym++) begin
      left = np; sp = s.start_prb;
      while (left > 0) begin
        exp_pkt_t e;
        n = (left > 30) ? 30 : left;
        e.k = k; e.sym = sym; e.eaxc = s.eaxc; e.sect = s.section_id; e.sp = sp; e.np = n;
        e.overload = overload;
        exp_db[key(k, sym, s.eaxc, sp)] = e;
        left -= n; sp += n;
      end
    end
  endfunction

  // ---------------- C-plane sender ----------------
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
    repeat (2) @(negedge clk);
  endtask

  function automatic tb_section_t sec(input int k, input int eaxc, input int sp, input int np,
                                      input int ss, input int ns);
    tb_section_t s;
    int f, sf, sl;
    slot_of(k, f, sf, sl);
    s.eaxc = eaxc; s.frame = f; s.subframe = sf; s.slot = sl; s.start_sym = ss;
    s.section_id = eaxc & 12'hFFF; s.start_prb = sp; s.num_prb = np; s.num_sym = ns;
    return s;
  endfunction

  task automatic send_expected(input int k, input tb_section_t s, input bit overload = 0);
    expect_slice(k, s, overload);
    send_msg(s);
  endtask

  task automatic urllc(input int k);
    for (int i = 0; i < 4; i++) send_expected(k, sec(k, 16'h0011 + i, 30 * i, 30, 3 * i, 2));
  endtask

  task automatic mmtc(input int k, input int base);
    for (int j = 0; j < 20; j++) send_expected(k, sec(k, base + j, 150 + j, 1, j % 14, 1));
  endtask

  // ---------------- frame checker ----------------
  byte unsigned fr[$];
  int frames = 0, bad_frames = 0, urllc_slot4 = 0, fr_start = 0, bad_timing = 0;
  always @(posedge clk) if (rst_n && eth_tvalid && eth_tready) begin
    if (fr.size() == 0) fr_start = cyc;
    fr.push_back(eth_tdata);
    if (eth_tlast) begin
      check_frame(fr);
      fr.delete();
    end
  end

  task automatic check_frame(input byte unsigned f[$]);
    int eaxc, fid, sfid, slid, sym, sp, np, pl, k;
    string kk;
    bit ok;
    frames++;
    ok = (f.size() >= 34);
    if (ok) begin
      eaxc = {f[22], f[23]};
      fid = f[27]; sfid = f[28] >> 4; slid = ((f[28] & 15) << 2) | (f[29] >> 6);
      sym = f[29] & 15;
      sp = ((f[31] & 3) << 8) | f[32];
      np = (f[33] == 0) ? 256 : f[33];
      pl = {f[20], f[21]};
      k = fid * 20 + sfid * 2 + slid;
      kk = key(k, sym, eaxc, sp);
      ok = exp_db.exists(kk) && !seen_db.exists(kk);
      if (ok) begin
        exp_pkt_t e;
        e = exp_db[kk];
        seen_db[kk] = 1;
        if (e.eaxc >= 16'h0011 && e.eaxc <= 16'h0014 && k == 4) urllc_slot4++;
        ok = (np == e.np) && (pl == 48 * e.np + 12) && (f.size() == 34 + 48 * e.np) &&
             ({f[0], f[1], f[2], f[3], f[4], f[5]} == 48'h02_00_00_00_00_BB) &&
             ({f[6], f[7], f[8], f[9], f[10], f[11]} == 48'h02_00_00_00_00_AA) &&
             ({f[12], f[13]} == 16'h8100) && ({f[14], f[15]} == 16'(eaxc & 12'hFFF)) &&
             ({f[16], f[17]} == 16'hAEFE) &&
             ({f[30], f[31][7:4]} == 12'(e.sect));
        // timing: a frame of slot k, symbol s starts within that symbol's
        // period; a few clocks of pipeline lag past its end are allowed
        if (fr_start < k * SLOT_CYC + sym * SYM_CYC || fr_start > k * SLOT_CYC + (sym + 1) * SYM_CYC + 8) begin
          ok = 0; bad_timing++;
          $display("FAIL frame %s started at clock %0d", kk, fr_start);
        end
        for (int i = 0; ok && i < 48 * e.np; i++)
          if (f[34 + i] != phy_byte(sym, 48 * e.sp + i)) ok = 0;
      end
    end
    checks++;
    if (!ok) begin
      bad_frames++; failures++;
      if (bad_frames < 10) $display("FAIL frame %0d: key %s size %0d", frames, kk, f.size());
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_t1_route = 0, n_t2_route = 0, n_reins = 0, n_t1_wait = 0, n_collide = 0,
      n_overflow = 0, n_swap = 0, n_late = 0, n_overlap = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.rec_t1) n_t1_route++;
    if (dut.rec_t2) n_t2_route++;
    if (dut.t2_reins) n_reins++;
    if (symbuf_count[symb_sel] > 10'd0 && sched_busy != 0) n_overlap++;
    if (dut.u_type1.u_proc.head_valid && !dut.u_type1.u_proc.head_match) n_t1_wait++;
    if (dut.t2_wr != 0 && !dut.t2_ready) n_collide++;
    if (fifo_drop[1]) n_overflow++;
    if (dut.swap) n_swap++;
    if (dut.late_drop) n_late++;
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat ((N_SLOTS + 1) * SLOT_CYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_slot(input int k);
    while (k_now < k) @(negedge clk);
  endtask

  task automatic mech(input int n, input string what);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  // ---------------- stimulus ----------------
  initial begin
    int missing, missing_overload, drops_expected, t2_before;
    cfg_in = CFG_DEFAULT;
    cfg_in.src_mac = 48'h02_00_00_00_00_AA;
    cfg_in.dst_mac = 48'h02_00_00_00_00_BB;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk); cfg_we = 1; @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 5; i++) begin
      @(negedge clk); slice_id = 16'h0011 + 16'(i); slice_add = 1;
      @(negedge clk); slice_add = 0;
    end
    checks++;
    if (n_type1_slices != 5) begin failures++; $display("FAIL slice list has %0d", n_type1_slices); end

    // slot 0: messages for slot 1, early ones for slot 2
    repeat (100) @(negedge clk);
    urllc(1);
    mmtc(1, 16'h1000);
    send_expected(1, sec(1, 16'h2000, 200, 61, 0, 2));   // 61 PRBs, symbols 0-1
    send_expected(1, sec(1, 16'h2001, 120, 11, 0, 4));   // 11 PRBs, symbols 0-3
    // a slot-3 record first, so that the type 2 pass after the next swap
    // starts with a write-back and its packet writes meet those of type 1
    send_expected(3, sec(3, 16'h3100, 5, 1, 5, 1));
    for (int j = 0; j < 10; j++) send_expected(2, sec(2, 16'h3000 + j, 250 + j, 1, 0, 14));
    send_expected(2, sec(2, 16'h0015, 233, 0, 0, 14));    // type 1, PRBs 233 to the end, all symbols

    // slot 1: messages for slot 2 with an overloaded symbol 13
    wait_slot(1);
    repeat (SYM_CYC) @(negedge clk);
    urllc(2);
    mmtc(2, 16'h1100);
    for (int j = 0; j < 8; j++) send_expected(2, sec(2, 16'h4000 + j, 30 * j, 30, 13, 1), 1);

    // slot 2: messages for slot 3
    wait_slot(2);
    repeat (SYM_CYC) @(negedge clk);
    urllc(3);
    mmtc(3, 16'h1200);

    // slot 3: overflow the type 2 FIFO while URLLC messages for slot 4 arrive
    wait_slot(3);
    repeat (100) @(negedge clk);
    t2_before = int'(t2_fifo_count);
    for (int j = 0; j < 1100; j++) begin
      send_msg(sec(40, 16'h5000 + j, j % 273, 1, j % 14, 1));
      if (j == 600) urllc(4);
    end
    drops_expected = 1100 - (1024 - t2_before);

    wait_slot(5);
    repeat (SYM_CYC) @(negedge clk);

    // every expected frame arrived, except overloaded ones reported as late
    missing = 0; missing_overload = 0;
    foreach (exp_db[kk]) if (!seen_db.exists(kk)) begin
      if (exp_db[kk].overload) missing_overload++;
      else begin
        missing++;
        if (missing < 10) $display("FAIL missing frame %s", kk);
      end
    end
    checks++;
    if (missing != 0) failures++;
    checks++;
    if (missing_overload == 0 || missing_overload != int'(late_drop_count)) begin
      failures++;
      $display("FAIL overloaded symbol: %0d frames missing, %0d reported late", missing_overload, late_drop_count);
    end
    checks++;
    if (int'(t2_drop_count) != drops_expected || t1_drop_count != 0 || urllc_slot4 != 8) begin
      failures++;
      $display("FAIL overflow: %0d dropped (expected %0d), type 1 dropped %0d, URLLC frames in slot 4 %0d/8",
               t2_drop_count, drops_expected, t1_drop_count, urllc_slot4);
    end
    checks++;
    if (int'(pkt_sent_count) != frames || symbuf_overflow_count != 0 || reject_count != 0) begin
      failures++; $display("FAIL counters sent=%0d frames=%0d", pkt_sent_count, frames);
    end
    checks++;
    if (int'(reinsert_count) != n_reins || cfg_rd != cfg_in || fifo_drop[0] ||
        int'(slices_done_count) != n_t1_route + n_t2_route - int'(t2_drop_count) - int'(t2_fifo_count)) begin
      failures++;
      $display("FAIL status: write-backs %0d/%0d, slices done %0d, routed %0d+%0d, dropped %0d, left %0d",
               reinsert_count, n_reins, slices_done_count, n_t1_route, n_t2_route, t2_drop_count, t2_fifo_count);
    end

    $display("frames checked %0d, expected %0d, late %0d, type 2 drops %0d", frames,
             exp_db.size(), late_drop_count, t2_drop_count);
    mech(n_t1_route, "records routed to type 1");
    mech(n_t2_route, "records routed to type 2");
    mech(n_reins, "type 2 write-backs");
    mech(n_t1_wait, "type 1 head waiting (clocks)");
    mech(n_collide, "type 2 held by type 1 (clocks)");
    mech(n_overflow, "type 2 FIFO overflow drops");
    mech(multi_pkt_slices, "multi-packet slices");
    mech(multi_sym_slices, "multi-symbol slices");
    mech(n_swap, "slot swaps");
    mech(n_overlap, "stages 2 and 3 at work together");
    mech(n_late, "late discards");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
