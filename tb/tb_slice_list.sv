// Self-checking testbench of slice_list: adds, duplicate adds, lookups, removals
// and a full list, against a reference set kept in the testbench.
//
// How: 40 random IDs are added to the 32-entry list (8 too many) plus one
// duplicate, 10 are removed and 24 more added; after each phase all 64 IDs are
// looked up, and add_fail and n_slices are compared with the reference set. Timing: 10 ns clock; lookups are
// combinational, updates take effect the next clock. Watchdog: 200,000 clocks.
// The parallel lookup is the paper's; the add and remove rules are this
// design's.
module tb_slice_list;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N = 32;
  logic add = 0, remove = 0, check_valid, add_fail;
  logic [15:0] wr_id = 0, check_id = 0;
  logic [5:0] n_slices;

  slice_list #(.LIST_SIZE(N)) dut (.*);

  bit ref_set [int];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_op(input bit a, input bit r, input logic [15:0] id);
    @(negedge clk);
    add = a; remove = r; wr_id = id;
    #1;
    if (a && !r) begin
      checks++;
      if (add_fail != (!ref_set.exists(int'(id)) && ref_set.size() >= N)) begin
        failures++; $display("FAIL add_fail id=%h", id);
      end
    end
    @(negedge clk);
    add = 0; remove = 0;
    if (r) ref_set.delete(int'(id));
    else if (a && ref_set.size() < N) ref_set[int'(id)] = 1;
  endtask

  task automatic check(input logic [15:0] id);
    @(negedge clk);
    check_id = id;
    #1;
    checks++;
    if (check_valid != ref_set.exists(int'(id))) begin
      failures++; $display("FAIL lookup id=%h got %0b", id, check_valid);
    end
  endtask

  initial begin
    logic [15:0] ids [64];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) ids[i] = 16'($urandom);
    check(16'h0000);
    for (int i = 0; i < 40; i++) do_op(1, 0, ids[i]);   // 8 more than the list holds
    do_op(1, 0, ids[3]);                                 // duplicate
    checks++;
    if (n_slices != 6'(ref_set.size())) begin failures++; $display("FAIL count %0d", n_slices); end
    for (int i = 0; i < 64; i++) check(ids[i]);
    for (int i = 0; i < 10; i++) do_op(0, 1, ids[2*i]);
    for (int i = 0; i < 64; i++) check(ids[i]);
    for (int i = 40; i < 64; i++) do_op(1, 0, ids[i]);
    for (int i = 0; i < 64; i++) check(ids[i]);
    checks++;
    if (n_slices != 6'(ref_set.size())) begin failures++; $display("FAIL count %0d", n_slices); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
