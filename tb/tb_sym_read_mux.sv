// Self-checking testbench of sym_read_mux: every select value, random heads;
// the selected head and valid must come out and the pop must reach that buffer
// only.
//
// How: 1000 random cases, each settled for 1 ns and compared with the expected
// selection. The multiplexer is combinational, so there is no clock; the
// watchdog is a 100 us time limit. Selection by the current symbol is the
// paper's; the returned pop steering is this design's.
module tb_sym_read_mux;
  import sa_pkg::*;
  int checks = 0, failures = 0;
  logic [3:0] sel;
  pkt_info_t heads [NUM_SYMBOLS];
  logic [NUM_SYMBOLS-1:0] head_valids, pops;
  pkt_info_t head;
  logic head_valid, pop;

  sym_read_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1000; i++) begin
      for (int s = 0; s < NUM_SYMBOLS; s++) heads[s] = pkt_info_t'({$urandom, $urandom, $urandom});
      head_valids = NUM_SYMBOLS'($urandom);
      sel = 4'(i % 16);
      pop = 1'($urandom);
      #1;
      checks++;
      if (sel < 14) begin
        if (head != heads[sel] || head_valid != head_valids[sel] ||
            pops != (NUM_SYMBOLS'(pop) << sel)) begin
          failures++; $display("FAIL sel=%0d", sel);
        end
      end else if (head_valid || pops != 0) begin
        failures++; $display("FAIL sel=%0d out of range", sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
