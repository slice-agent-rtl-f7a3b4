// The fourteen 2x1 multiplexers in front of the symbol buffers.
//
// Both scheduling units can write packet info to any set of symbol buffers in the
// same clock. For each symbol the multiplexer passes the type "1" write when there
// is one and the type "2" write otherwise; the priority of type "1" is the
// paper's, because type "1" slices usually have less time left. A type "2" write
// that would lose one of its symbols to type "1" is held back entirely
// (t2_ready low) and repeated in a later clock, so that a packet always reaches
// all of its symbols at once; this hold-back is this design's choice. Purely
// combinational.
module sym_write_mux
  import sa_pkg::*;
(
  input  logic [NUM_SYMBOLS-1:0] t1_wr,
  input  pkt_info_t              t1_pkt,
  input  logic [NUM_SYMBOLS-1:0] t2_wr,
  input  pkt_info_t              t2_pkt,
  output logic                   t2_ready,
  output logic [NUM_SYMBOLS-1:0] buf_wr,
  output pkt_info_t              buf_data [NUM_SYMBOLS]
);
  assign t2_ready = ((t1_wr & t2_wr) == '0);

  always_comb begin
    for (int s = 0; s < NUM_SYMBOLS; s++) begin
      if (t1_wr[s]) begin
        buf_wr[s]   = 1'b1;
        buf_data[s] = t1_pkt;
      end else begin
        buf_wr[s]   = t2_wr[s] && t2_ready;
        buf_data[s] = t2_pkt;
      end
    end
  end
endmodule
