// Self-checking testbench of sched_process. A type "1" and a type "2" instance
// each read from a FIFO modelled in the testbench. Checked against values
// computed here: the split of each slice into ceil(nPRB / maxPRBpkt) packets,
// the symbols each packet is written to, the processing time
// 1 + sum(2 * n_pkt) + 1 clocks of a run (plus one clock per record the type "2"
// unit writes back), the type "1" unit stopping at a record for another slot,
// and the type "2" unit writing such records back in order.
module tb_sched_process;
  import sa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  slot_id_t next_slot;
  logic swap = 0;
  logic [8:0] max_prb_pkt = 30;

  // ---- model FIFOs and DUTs, index 0 = type 1, 1 = type 2 ----
  sched_rec_t q0[$], q1[$];
  sched_rec_t head [2];
  logic [1:0] head_valid, pop, reins_en, busy, slice_done, new_entry;
  logic [10:0] count [2];
  pkt_info_t pkt [2];
  logic [NUM_SYMBOLS-1:0] sym_wr [2];
  logic wr_ready1 = 1, reins_ready1 = 1;

  sched_process #(.SLICE_TYPE(1)) u_t1 (
    .clk, .rst_n, .head(head[0]), .head_valid(head_valid[0]), .count(count[0]),
    .new_entry(new_entry[0]), .pop(pop[0]), .reins_en(reins_en[0]), .reins_ready(1'b1),
    .next_slot, .swap, .max_prb_pkt, .pkt(pkt[0]), .sym_wr(sym_wr[0]), .wr_ready(1'b1),
    .busy(busy[0]), .slice_done(slice_done[0]));
  sched_process #(.SLICE_TYPE(2)) u_t2 (
    .clk, .rst_n, .head(head[1]), .head_valid(head_valid[1]), .count(count[1]),
    .new_entry(new_entry[1]), .pop(pop[1]), .reins_en(reins_en[1]), .reins_ready(reins_ready1),
    .next_slot, .swap, .max_prb_pkt, .pkt(pkt[1]), .sym_wr(sym_wr[1]), .wr_ready(wr_ready1),
    .busy(busy[1]), .slice_done(slice_done[1]));

  typedef struct { pkt_info_t p; logic [NUM_SYMBOLS-1:0] m; } wr_t;
  wr_t got0[$], got1[$];
  int reins_cnt = 0, busy_cyc0 = 0, busy_cyc1 = 0;

  always @(posedge clk) begin
    if (sym_wr[0] != 0) got0.push_back('{pkt[0], sym_wr[0]});
    if (sym_wr[1] != 0 && wr_ready1) got1.push_back('{pkt[1], sym_wr[1]});
    if (busy[0]) busy_cyc0++;
    if (busy[1]) busy_cyc1++;
    if (pop[0] && q0.size() > 0) void'(q0.pop_front());
    if (pop[1] && q1.size() > 0) begin
      sched_rec_t h;
      h = q1.pop_front();
      if (reins_en[1]) begin q1.push_back(h); reins_cnt++; end
    end
  end
  always @(posedge clk) begin
    #1;
    head[0] <= (q0.size() > 0) ? q0[0] : '0;  head_valid[0] <= (q0.size() > 0); count[0] <= 11'(q0.size());
    head[1] <= (q1.size() > 0) ? q1[0] : '0;  head_valid[1] <= (q1.size() > 0); count[1] <= 11'(q1.size());
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sched_rec_t mk(input slot_id_t sl, input int id, input int sp, input int np,
                                    input int ss, input int ns);
    sched_rec_t r;
    r.slot = sl; r.eaxc_id = 16'(id); r.section_id = 12'(id); r.start_prb = 10'(sp);
    r.num_prb = 9'(np); r.start_sym = 4'(ss); r.num_sym = 4'(ns);
    return r;
  endfunction

  // expected packet list of one record
  function automatic int expect_pkts(input sched_rec_t r, input int mx, ref wr_t e[$]);
    int left, st, n, k;
    left = int'(r.num_prb); st = int'(r.start_prb); k = 0;
    while (left > 0) begin
      wr_t w;
      n = (left > mx) ? mx : left;
      w.p.slot = r.slot; w.p.eaxc_id = r.eaxc_id; w.p.section_id = r.section_id;
      w.p.start_prb = 10'(st); w.p.num_prb = 9'(n);
      w.m = '0;
      for (int s = 0; s < 14; s++) if (s >= r.start_sym && s < r.start_sym + r.num_sym) w.m[s] = 1;
      e.push_back(w);
      left -= n; st += n; k++;
    end
    return k;
  endfunction

  task automatic compare(ref wr_t got[$], ref wr_t e[$], input string tag);
    checks++;
    if (got.size() != e.size()) begin
      failures++; $display("FAIL %s: %0d writes, expected %0d", tag, got.size(), e.size());
    end else begin
      foreach (e[i]) if (got[i].p != e[i].p || got[i].m != e[i].m) begin
        failures++;
        $display("FAIL %s write %0d: prb %0d+%0d mask %b exp %0d+%0d mask %b", tag, i,
                 got[i].p.start_prb, got[i].p.num_prb, got[i].m,
                 e[i].p.start_prb, e[i].p.num_prb, e[i].m);
        break;
      end
    end
  endtask

  initial begin
    slot_id_t sa, sb;
    wr_t e0[$], e1[$];
    sched_rec_t r;
    int npk, nmis;
    sa = '{frame: 8'd3, subframe: 4'd2, slot: 6'd1};
    sb = '{frame: 8'd3, subframe: 4'd3, slot: 6'd0};
    next_slot = sb;
    new_entry = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------- type 1: six slices for slot sa, then one for sb ----------
    npk = 0;
    // the paper's examples: 61 PRBs over symbols 0-1, 11 PRBs over 0-3, plus
    // 1, 30, 31 and 273 PRBs
    r = mk(sa, 1, 0, 61, 0, 2);  q0.push_back(r); npk += expect_pkts(r, 30, e0);
    r = mk(sa, 2, 0, 11, 0, 4);  q0.push_back(r); npk += expect_pkts(r, 30, e0);
    r = mk(sa, 3, 100, 1, 13, 1); q0.push_back(r); npk += expect_pkts(r, 30, e0);
    r = mk(sa, 4, 40, 30, 5, 9);  q0.push_back(r); npk += expect_pkts(r, 30, e0);
    r = mk(sa, 5, 70, 31, 12, 5); q0.push_back(r); npk += expect_pkts(r, 30, e0);
    r = mk(sa, 6, 0, 273, 3, 1);  q0.push_back(r); npk += expect_pkts(r, 30, e0);
    r = mk(sb, 7, 10, 10, 0, 14); q0.push_back(r);
    repeat (10) @(posedge clk);
    checks++;
    if (busy[0] || got0.size() != 0) begin failures++; $display("FAIL type 1 ran for another slot"); end
    busy_cyc0 = 0;
    @(negedge clk); next_slot = sa;
    repeat (100) @(posedge clk);
    compare(got0, e0, "type1");
    checks++;
    if (busy_cyc0 != 1 + 2 * npk + 1) begin
      failures++; $display("FAIL type 1 processing time %0d, expected %0d", busy_cyc0, 2 + 2 * npk);
    end
    checks++;
    if (q0.size() != 1 || q0[0].eaxc_id != 7) begin failures++; $display("FAIL type 1 did not stop at the sb record"); end
    // the blocked record goes once its slot is next
    got0.delete(); e0.delete(); busy_cyc0 = 0;
    void'(expect_pkts(q0[0], 30, e0));
    @(negedge clk); next_slot = sb;
    repeat (20) @(posedge clk);
    compare(got0, e0, "type1 second slot");
    checks++;
    if (busy_cyc0 != 4) begin failures++; $display("FAIL type 1 single-packet time %0d", busy_cyc0); end

    // ---------- type 2: interleaved records for sa and sb, jumbo packets ----------
    @(negedge clk); next_slot = sa; max_prb_pkt = 187;
    npk = 0; nmis = 0;
    for (int i = 0; i < 20; i++) begin
      if (i % 3 == 1) begin r = mk(sb, 100 + i, i, 5, 0, 1); nmis++; end
      else begin
        r = mk(sa, 100 + i, i, (i == 4) ? 273 : 1 + i * 9, i % 14, 1 + (i % 5));
        npk += expect_pkts(r, 187, e1);
      end
      q1.push_back(r);
    end
    @(negedge clk); new_entry[1] = 1; @(negedge clk); new_entry[1] = 0;
    busy_cyc1 = 0;
    repeat (200) @(posedge clk);
    compare(got1, e1, "type2");
    checks++;
    if (busy_cyc1 != 1 + 2 * npk + nmis + 1) begin
      failures++; $display("FAIL type 2 processing time %0d, expected %0d", busy_cyc1, 2 + 2 * npk + nmis);
    end
    checks++;
    if (q1.size() != nmis || reins_cnt != nmis) begin
      failures++; $display("FAIL type 2 kept %0d records, wrote back %0d, expected %0d", q1.size(), reins_cnt, nmis);
    end
    foreach (q1[i]) if (q1[i].slot != sb) begin failures++; $display("FAIL wrong record kept"); end
    // swap to the next slot with a busy write port: everything left goes out
    got1.delete(); e1.delete();
    foreach (q1[i]) void'(expect_pkts(q1[i], 187, e1));
    @(negedge clk); next_slot = sb; swap = 1; wr_ready1 = 0; reins_ready1 = 0;
    @(negedge clk); swap = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (got1.size() != 0) begin failures++; $display("FAIL type 2 wrote without wr_ready"); end
    wr_ready1 = 1; reins_ready1 = 1;
    repeat (100) @(posedge clk);
    compare(got1, e1, "type2 after swap");
    checks++;
    if (q1.size() != 0) begin failures++; $display("FAIL type 2 FIFO not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
