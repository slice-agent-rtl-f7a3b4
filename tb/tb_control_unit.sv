// Self-checking testbench of control_unit: a parameter load reaches cfg and
// changes the slot arithmetic (numerology), slices added over the management
// strobes are found by the decoder-side lookup, and the time ids produce the
// expected next slot, symbol select and swap.
//
// How: one parameter write with numerology 0, then time ids walked through slot
// changes while the next slot and swap are compared with values worked out here;
// lookups are made for added, never-added and removed eAxC IDs.
// Timing: 10 ns clock; ids change on the falling edge and the registered
// outputs are read one clock later. Watchdog: 100,000 clocks.
// The split into parameters, slice list and pipeline control is the paper's;
// the expected values follow this design's own conventions.
module tb_control_unit;
  import sa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, slice_add = 0, slice_remove = 0, slice_add_fail, id_valid, swap;
  sa_cfg_t cfg_in = '0, cfg;
  logic [15:0] slice_id = 0, id_check = 0;
  logic [5:0] n_type1_slices;
  logic [7:0] frame_id = 0;
  logic [3:0] subframe_id = 0, symbol_id = 0, next_symbol, symb_sel;
  logic [5:0] slot_id = 0;
  slot_id_t cur_slot, next_slot;

  control_unit dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // mu = 1 by default: slot 1 of subframe 3 is followed by slot 0 of subframe 4
    @(negedge clk); frame_id = 7; subframe_id = 3; slot_id = 1; symbol_id = 13;
    @(negedge clk);
    chk(next_slot.frame == 7 && next_slot.subframe == 4 && next_slot.slot == 0, "mu1 next slot");
    chk(symb_sel == 13 && next_symbol == 0, "symbol");
    // load mu = 2: slot 1 is followed by slot 2
    cfg_in = CFG_DEFAULT; cfg_in.numerology = 2; cfg_in.max_prb_pkt = 187;
    cfg_we = 1; @(negedge clk); cfg_we = 0;
    @(negedge clk);
    chk(cfg.max_prb_pkt == 187, "cfg load");
    chk(next_slot.subframe == 3 && next_slot.slot == 2, "mu2 next slot");
    // slot change gives one swap
    slot_id = 2;
    @(posedge clk); @(negedge clk);
    chk(swap == 1'b1, "swap on slot change");
    @(negedge clk);
    chk(swap == 1'b0, "swap is one clock");
    // slice list through the management strobes
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); slice_id = 16'h100 + 16'(i); slice_add = 1;
      @(negedge clk); slice_add = 0;
    end
    chk(n_type1_slices == 4, "four type-1 slices");
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); id_check = 16'h100 + 16'(i); #1;
      chk(id_valid == (i < 4), "lookup");
    end
    @(negedge clk); slice_id = 16'h101; slice_remove = 1;
    @(negedge clk); slice_remove = 0; id_check = 16'h101; #1;
    chk(!id_valid && n_type1_slices == 3, "remove");
    chk(!slice_add_fail, "no add failure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
