// Self-checking testbench of cplane_decoder: random uplink messages with 1 to 4
// sections, for eAxC IDs inside and outside a model slice list, with random idle
// gaps; downlink, wrong message type and wrong section type messages must be
// rejected. Every record is compared with the fields the message was built from.
//
// How: messages are built byte by byte by tb_oran_pkg (independently of the
// decoder) and streamed one byte per clock; the expected records are queued at
// the same time and popped as rec_t1/rec_t2 pulses arrive. A model list decides
// which IDs the lookup answers as listed.
// Timing: 10 ns clock, one byte per clock (the paper gives no decoding rate to
// check). Watchdog: 200,000 clocks.
// The routing rule (listed ID to type "1") is the paper's; the byte layout is
// the O-RAN section-type-1 layout this design assumes.
module tb_cplane_decoder;
  import sa_pkg::*;
  import tb_oran_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] s_tdata = 0;
  logic s_tvalid = 0, s_tlast = 0, s_tready, id_valid, rec_t1, rec_t2, msg_reject;
  logic [15:0] id_check;
  sched_rec_t rec;

  cplane_decoder dut (.*);

  // model of the control unit's slice list: IDs below 0x0100 are type "1"
  assign id_valid = (id_check < 16'h0100);

  typedef struct { sched_rec_t r; bit t1; } exp_t;
  exp_t expq[$];
  int rejects = 0, exp_rejects = 0, n_t1 = 0, n_t2 = 0;

  always @(posedge clk) if (rst_n) begin
    if (msg_reject) rejects++;
    if (rec_t1 || rec_t2) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected record"); end
      else begin
        exp_t e;
        e = expq.pop_front();
        if (rec != e.r || rec_t1 != e.t1 || rec_t2 != !e.t1) begin
          failures++;
          $display("FAIL record eaxc=%h exp %h prb %0d/%0d exp %0d/%0d t1=%0b", rec.eaxc_id,
                   e.r.eaxc_id, rec.start_prb, rec.num_prb, e.r.start_prb, e.r.num_prb, rec_t1);
        end
        if (rec_t1) n_t1++; else n_t2++;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input byte unsigned m[$]);
    foreach (m[i]) begin
      @(negedge clk);
      s_tdata = m[i]; s_tvalid = 1; s_tlast = (i == m.size() - 1);
      if ($urandom_range(4) == 0 && i != m.size() - 1) begin
        @(negedge clk); s_tvalid = 0;
      end
    end
    @(negedge clk); s_tvalid = 0; s_tlast = 0;
  endtask

  initial begin
    byte unsigned m[$];
    tb_section_t s[$];
    tb_section_t one;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int kind;
      s.delete();
      kind = (i % 10 == 9) ? 1 + int'($urandom_range(2)) : 0;
      for (int k = 0; k < 1 + int'($urandom_range(3)); k++) begin
        one.eaxc = (i % 3 == 0) ? int'($urandom_range(255)) : 256 + int'($urandom_range(65279));
        one.frame = int'($urandom_range(255)); one.subframe = int'($urandom_range(9));
        one.slot = int'($urandom_range(1)); one.start_sym = int'($urandom_range(13));
        if (k > 0) begin
          one.eaxc = s[0].eaxc; one.frame = s[0].frame; one.subframe = s[0].subframe;
          one.slot = s[0].slot; one.start_sym = s[0].start_sym;
        end
        one.section_id = int'($urandom_range(4095));
        one.start_prb = int'($urandom_range(272));
        one.num_prb = (i % 17 == 0) ? 0 : 1 + int'($urandom_range(254));
        one.num_sym = 1 + int'($urandom_range(13));
        s.push_back(one);
      end
      if (kind == 0) begin
        foreach (s[k]) begin
          exp_t e;
          e.r.slot.frame = 8'(s[k].frame); e.r.slot.subframe = 4'(s[k].subframe);
          e.r.slot.slot = 6'(s[k].slot); e.r.eaxc_id = 16'(s[k].eaxc);
          e.r.section_id = 12'(s[k].section_id); e.r.start_sym = 4'(s[k].start_sym);
          e.r.num_sym = 4'(s[k].num_sym); e.r.start_prb = 10'(s[k].start_prb);
          e.r.num_prb = (s[k].num_prb == 0) ? 9'(273 - s[k].start_prb) : 9'(s[k].num_prb);
          e.t1 = (s[k].eaxc < 256);
          expq.push_back(e);
        end
        build_msg(m, s);
      end else begin
        exp_rejects++;
        if (kind == 1) build_msg(m, s, 1);          // downlink
        else           build_msg(m, s, 0, 0);       // not a control message
      end
      send(m);
    end
    // wrong section type
    build_msg(m, s, 0, 2, 3); exp_rejects++;
    send(m);
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0 || rejects != exp_rejects || n_t1 == 0 || n_t2 == 0) begin
      failures++;
      $display("FAIL left=%0d rejects=%0d/%0d t1=%0d t2=%0d", expq.size(), rejects, exp_rejects, n_t1, n_t2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
