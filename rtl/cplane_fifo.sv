// Decoded C-plane FIFO of one scheduling unit.
//
// Holds decoded C-plane records (sched_rec_t) until the scheduling process
// consumes them. It has two write sources: the C-plane decoder and, for the type
// "2" unit, the scheduling process itself, which writes back a record that is
// not for the coming slot. The decoder has priority; a reinsertion is accepted
// (reins_ready) only in a clock in which the decoder does not write, and the
// scheduling process pops the head in that same clock, so a reinsertion never
// changes the occupancy. A decoder record that arrives while the FIFO is full is
// discarded, as the paper describes, and counted on drop / drop_count. The paper
// gives the depth (1024) and the discard rule; the write arbitration is this
// design's choice. Head data are valid one clock after a write into an empty FIFO.
//
// The assertion on the write-back rule is disabled while rst_n is low, so
// rst_n is read both by the asynchronous reset of the flip-flops and by the
// clocked assertion; lint tools report that mixed use (here and in the modules
// above this one), but the assertion is simulation-only and adds no logic.
module cplane_fifo
  import sa_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  sched_rec_t  wr_data,
  input  logic        reins_en,
  input  sched_rec_t  reins_data,
  output logic        reins_ready,
  input  logic        rd_pop,
  output sched_rec_t  head,
  output logic        head_valid,
  output logic [CW-1:0] count,
  output logic        new_entry,   // a decoder record was stored this clock
  output logic        drop,        // a decoder record was discarded this clock
  output logic [15:0] drop_count
);
  logic       empty, full, f_wr;
  sched_rec_t f_wdata;

  assign reins_ready = !wr_en;
  assign f_wr        = wr_en || reins_en;
  assign f_wdata     = wr_en ? wr_data : reins_data;
  assign head_valid  = !empty;
  assign drop        = wr_en && full && !(rd_pop && !empty);
  assign new_entry   = wr_en && !drop;

  sync_fifo #(.WIDTH($bits(sched_rec_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(f_wr), .wr_data(f_wdata),
    .rd_en(rd_pop), .rd_data(head),
    .empty, .full, .count
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          drop_count <= '0;
    else if (drop && drop_count != '1)   drop_count <= drop_count + 16'd1;
  end

  // A reinsertion always comes with a pop of the head, so it cannot overflow.
  property p_reins_pops;
    @(posedge clk) disable iff (!rst_n) (reins_en && reins_ready) |-> (rd_pop && head_valid);
  endproperty
  a_reins_pops: assert property (p_reins_pops);
endmodule
