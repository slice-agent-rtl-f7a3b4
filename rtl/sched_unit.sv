// One scheduling data processing unit: decoded C-plane FIFO, scheduling process
// and the 1x14 demultiplexer that spreads packet info over the symbol buffers.
//
// The Slice Agent has two of them. The type "1" unit serves the slices listed in
// the control unit (typically URLLC) and processes its FIFO strictly in order; the
// type "2" unit serves all other slices and writes back records that are not yet
// due. Because each unit has its own FIFO, an overflow of the type "2" FIFO
// cannot delay or drop type "1" slices: this is the isolation the paper
// evaluates. Records enter on wr_en; packet writes leave on sym_wr (one bit per
// symbol buffer) with pkt. For SLICE_TYPE 1, wr_ready should be tied high.
// rst_n is also read by the FIFO's clocked assertion (see cplane_fifo), which
// lint tools report as a reset used both asynchronously and synchronously.
module sched_unit
  import sa_pkg::*;
#(
  parameter int unsigned SLICE_TYPE = 1,
  parameter int unsigned FIFO_DEPTH = 1024,
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  sched_rec_t    wr_data,
  input  slot_id_t      next_slot,
  input  logic          swap,
  input  logic [8:0]    max_prb_pkt,
  output pkt_info_t     pkt,
  output logic [NUM_SYMBOLS-1:0] sym_wr,
  input  logic          wr_ready,
  output logic [CW-1:0] fifo_count,
  output logic          drop,
  output logic [15:0]   drop_count,
  output logic          busy,
  output logic          slice_done,
  output logic          reinsert
);
  sched_rec_t head;
  logic head_valid, pop, reins_en, reins_ready, new_entry;

  cplane_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en, .wr_data,
    .reins_en, .reins_data(head), .reins_ready,
    .rd_pop(pop), .head, .head_valid,
    .count(fifo_count), .new_entry, .drop, .drop_count
  );

  sched_process #(.SLICE_TYPE(SLICE_TYPE), .CW(CW)) u_proc (
    .clk, .rst_n,
    .head, .head_valid, .count(fifo_count), .new_entry,
    .pop, .reins_en, .reins_ready,
    .next_slot, .swap, .max_prb_pkt,
    .pkt, .sym_wr, .wr_ready,
    .busy, .slice_done
  );

  assign reinsert = reins_en;
endmodule
