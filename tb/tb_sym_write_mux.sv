// Self-checking testbench of sym_write_mux: random write masks from both units;
// type "1" must always get through, type "2" only when no symbol collides, and
// then on all its symbols.
//
// How: 2000 random cases, each settled for 1 ns and compared with the expected
// enables and data. Combinational, so there is no clock; the watchdog is a
// 100 us time limit. Type "1" priority is the paper's; holding back the whole
// type "2" write on a collision is this design's.
module tb_sym_write_mux;
  import sa_pkg::*;
  int checks = 0, failures = 0;
  logic [NUM_SYMBOLS-1:0] t1_wr, t2_wr, buf_wr;
  pkt_info_t t1_pkt, t2_pkt;
  pkt_info_t buf_data [NUM_SYMBOLS];
  logic t2_ready;

  sym_write_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NUM_SYMBOLS-1:0] e_wr;
    bit e_ready;
    for (int i = 0; i < 2000; i++) begin
      t1_wr = (i % 3 == 0) ? '0 : NUM_SYMBOLS'($urandom);
      t2_wr = (i % 5 == 0) ? '0 : NUM_SYMBOLS'($urandom) & NUM_SYMBOLS'($urandom);
      t1_pkt = pkt_info_t'({$urandom, $urandom, $urandom});
      t2_pkt = pkt_info_t'({$urandom, $urandom, $urandom});
      #1;
      e_ready = ((t1_wr & t2_wr) == 0);
      e_wr = t1_wr | (e_ready ? t2_wr : '0);
      checks++;
      if (t2_ready != e_ready || buf_wr != e_wr) begin
        failures++; $display("FAIL %b %b -> %b %b", t1_wr, t2_wr, buf_wr, t2_ready);
      end
      for (int s = 0; s < NUM_SYMBOLS; s++) begin
        if (t1_wr[s] && buf_data[s] != t1_pkt) begin failures++; $display("FAIL data t1 s%0d", s); end
        if (!t1_wr[s] && t2_wr[s] && e_ready && buf_data[s] != t2_pkt) begin
          failures++; $display("FAIL data t2 s%0d", s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
