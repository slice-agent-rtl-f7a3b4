// Self-checking testbench of pipeline_control: walks time through several
// frames for every numerology and checks next-slot ids, next symbol, symbol
// select and one swap pulse per slot change.
//
// How: for numerologies 0 to 4 the testbench counts symbols, slots, subframes
// and frames itself and drives the ids; the registered outputs are compared one
// clock later, and swap pulses are counted against slot changes.
// Timing: 10 ns clock; the ids move on every few clocks. Watchdog: 400,000 clocks.
// The output names follow the paper's control-unit diagram; the slot arithmetic
// is standard 5G NR numbering.
module tb_pipeline_control;
  import sa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] frame_id = 0;
  logic [3:0] subframe_id = 0, symbol_id = 0;
  logic [5:0] slot_id = 0;
  logic [2:0] numerology = 0;
  slot_id_t cur_slot, next_slot;
  logic [3:0] next_symbol, symb_sel;
  logic swap;

  pipeline_control dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int swaps;
  always @(posedge clk) if (rst_n && swap) swaps++;

  initial begin
    int f, sf, sl, nf, nsf, nsl, spsf, exp_swaps;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int mu = 0; mu <= 4; mu++) begin
      numerology = 3'(mu);
      spsf = 1 << mu;
      f = 254; sf = 9; sl = spsf - 2; if (sl < 0) sl = 0;
      swaps = 0; exp_swaps = 0;
      for (int step = 0; step < 40; step++) begin
        for (int sym = 0; sym < 14; sym += 5) begin
          @(negedge clk);
          frame_id = 8'(f); subframe_id = 4'(sf); slot_id = 6'(sl); symbol_id = 4'(sym);
          @(negedge clk);
          nsl = sl + 1; nsf = sf; nf = f;
          if (nsl == spsf) begin nsl = 0; nsf = sf + 1; if (nsf == 10) begin nsf = 0; nf = (f + 1) % 256; end end
          checks++;
          if (next_slot.frame != 8'(nf) || next_slot.subframe != 4'(nsf) || next_slot.slot != 6'(nsl) ||
              symb_sel != 4'(sym) || next_symbol != 4'((sym + 1) % 14) ||
              cur_slot.frame != 8'(f) || cur_slot.slot != 6'(sl)) begin
            failures++;
            $display("FAIL mu=%0d f=%0d sf=%0d sl=%0d -> %0d %0d %0d", mu, f, sf, sl,
                     next_slot.frame, next_slot.subframe, next_slot.slot);
          end
        end
        f = nf; sf = nsf; sl = nsl;
        exp_swaps++;
      end
      @(negedge clk); @(negedge clk);
      checks++;
      // every slot step is a change of slot; the first one of each numerology too
      if (swaps != exp_swaps) begin failures++; $display("FAIL swaps %0d exp %0d", swaps, exp_swaps); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
