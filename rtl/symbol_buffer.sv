// One symbol buffer: the list of packets to be built in one OFDM symbol.
//
// There are 14 of them, one per symbol of an NR slot. Each is a FIFO of packet
// info (slot id, eAxC ID, section ID, start PRB, number of PRBs) written by the
// scheduling units and read by the encapsulation unit while its symbol is on air.
// The default depth of 512 follows the paper's FPGA mapping (two 36-kbit FIFOs per
// symbol buffer). A write into a full buffer is lost and reported on overflow,
// which is this design's choice; the paper does not say what happens then.
module symbol_buffer
  import sa_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  pkt_info_t     wr_data,
  input  logic          rd_pop,
  output pkt_info_t     head,
  output logic          head_valid,
  output logic [CW-1:0] count,
  output logic          overflow
);
  logic empty, full;

  sync_fifo #(.WIDTH($bits(pkt_info_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en, .wr_data,
    .rd_en(rd_pop), .rd_data(head),
    .empty, .full, .count
  );

  assign head_valid = !empty;
  assign overflow   = wr_en && full && !(rd_pop && !empty);
endmodule
