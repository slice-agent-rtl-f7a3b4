// Self-checking testbench of encapsulation with a behavioural low PHY and a
// random ready on the Ethernet side. Packets of random size, IQ width and start
// PRB are queued for the current slot; each emitted frame is compared byte by
// byte with one built here from the packet info (headers, payload length,
// VLAN, eCPRI and U-plane fields, IQ bytes from the start byte on). An entry of a
// past slot must be discarded and one of the next slot left in place.
module tb_encapsulation;
  import sa_pkg::*;
  import tb_oran_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [47:0] src_mac = 48'h0A0B0C0D0E0F, dst_mac = 48'h112233445566;
  logic [4:0] iq_width = 16;
  slot_id_t cur_slot, next_slot;
  logic [3:0] cur_symbol = 5;
  pkt_info_t head;
  logic head_valid, pop, phy_start, phy_tvalid, phy_tready, m_tvalid, m_tlast, m_tready;
  logic [15:0] phy_start_byte;
  logic [7:0] phy_tdata, m_tdata;
  logic pkt_sent, late_drop;

  encapsulation dut (.*);

  // symbol buffer model
  pkt_info_t q[$];
  assign head_valid = (q.size() > 0);
  assign head = (q.size() > 0) ? q[0] : '0;
  always @(posedge clk) if (pop && q.size() > 0) void'(q.pop_front());

  // behavioural low PHY: streams the symbol's bytes from the requested start byte
  int phy_off = 0;
  logic phy_on = 0;
  always @(posedge clk) begin
    if (phy_start) begin phy_off <= int'(phy_start_byte); phy_on <= 1; end
    else if (phy_tvalid && phy_tready) phy_off <= phy_off + 1;
  end
  logic phy_gap;
  always @(negedge clk) phy_gap = ($urandom_range(5) == 0);
  assign phy_tvalid = phy_on && !phy_gap;
  assign phy_tdata  = phy_byte(int'(cur_symbol), phy_off);
  always @(negedge clk) m_tready = ($urandom_range(6) != 0);

  // frame capture
  byte unsigned frame[$];
  byte unsigned frames[$][$];
  always @(posedge clk) if (m_tvalid && m_tready) begin
    frame.push_back(m_tdata);
    if (m_tlast) begin frames.push_back(frame); frame.delete(); end
  end
  int lates = 0, sents = 0;
  always @(posedge clk) begin if (late_drop) lates++; if (pkt_sent) sents++; end

  function automatic void expect_frame(ref byte unsigned e[$], input pkt_info_t p, input int w,
                                       input int seq);
    int pl, sb;
    pl = 3 * w * int'(p.num_prb) + 12;
    sb = 3 * w * int'(p.start_prb);
    e.delete();
    for (int i = 5; i >= 0; i--) e.push_back(8'(dst_mac >> (8 * i)));
    for (int i = 5; i >= 0; i--) e.push_back(8'(src_mac >> (8 * i)));
    e.push_back(8'h81); e.push_back(8'h00);
    e.push_back(8'(p.eaxc_id[11:8])); e.push_back(p.eaxc_id[7:0]);
    e.push_back(8'hAE); e.push_back(8'hFE);
    e.push_back(8'h10); e.push_back(8'h00); e.push_back(8'(pl >> 8)); e.push_back(8'(pl));
    e.push_back(p.eaxc_id[15:8]); e.push_back(p.eaxc_id[7:0]);
    e.push_back(8'(seq)); e.push_back(8'h80);
    e.push_back(8'h10); e.push_back(p.slot.frame);
    e.push_back({p.slot.subframe, p.slot.slot[5:2]});
    e.push_back({p.slot.slot[1:0], 2'b00, cur_symbol});
    e.push_back(p.section_id[11:4]);
    e.push_back({p.section_id[3:0], 2'b00, p.start_prb[9:8]});
    e.push_back(p.start_prb[7:0]);
    e.push_back((p.num_prb > 255) ? 8'd0 : p.num_prb[7:0]);
    for (int i = 0; i < pl - 12; i++) e.push_back(phy_byte(int'(cur_symbol), sb + i));
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pkt_info_t p, sent[$];
    int widths[$];
    byte unsigned e[$];
    slot_id_t old;
    cur_slot  = '{frame: 8'd20, subframe: 4'd5, slot: 6'd1};
    next_slot = '{frame: 8'd20, subframe: 4'd6, slot: 6'd0};
    old       = '{frame: 8'd20, subframe: 4'd5, slot: 6'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 24; i++) begin
      @(negedge clk);
      wait (q.size() == 0 && frame.size() == 0 && !m_tvalid);
      repeat (3) @(negedge clk);
      iq_width = (i < 12) ? 5'd16 : 5'(8 + (i % 9));
      cur_symbol = 4'(i % 14);
      p.slot = cur_slot; p.eaxc_id = 16'($urandom); p.section_id = 12'($urandom);
      p.num_prb = (i == 0) ? 9'd30 : (i == 1) ? 9'd273 : 9'(1 + $urandom_range(40));
      p.start_prb = (i == 1) ? 10'd0 : 10'($urandom_range(273 - int'(p.num_prb)));
      if (i == 5) begin p.slot = old; q.push_back(p); p.slot = cur_slot; end
      if (i == 6) begin p.slot = next_slot; end
      q.push_back(p);
      if (i != 6) begin sent.push_back(p); widths.push_back(int'(iq_width)); end
      if (i == 6) begin
        repeat (50) @(negedge clk);
        checks++;
        if (q.size() != 1 || frames.size() != sent.size()) begin failures++; $display("FAIL next-slot entry was taken"); end
        q.delete();
      end else begin
        @(negedge clk);
        wait (q.size() == 0 && frames.size() == sent.size());
        expect_frame(e, sent[$], widths[$], sent.size() - 1);
        checks++;
        if (frames[$] != e) begin
          failures++;
          $display("FAIL frame %0d: %0d bytes, expected %0d", i, frames[$].size(), e.size());
          foreach (e[k]) if (k < frames[$].size() && frames[$][k] != e[k]) begin
            $display("  first difference at byte %0d: %h vs %h", k, frames[$][k], e[k]); break;
          end
        end
      end
      phy_on = 0;
    end
    checks++;
    if (lates != 1 || sents != sent.size()) begin failures++; $display("FAIL late=%0d sent=%0d", lates, sents); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
