// The 14-to-1 multiplexer between the symbol buffers and the encapsulation unit.
//
// The control unit's symbSel names the symbol now on air; the multiplexer shows
// that symbol buffer's head to the encapsulation unit and steers the unit's pop
// back to the same buffer only. Purely combinational. A select above 13 connects
// nothing.
module sym_read_mux
  import sa_pkg::*;
(
  input  logic [3:0]             sel,
  input  pkt_info_t              heads [NUM_SYMBOLS],
  input  logic [NUM_SYMBOLS-1:0] head_valids,
  output pkt_info_t              head,
  output logic                   head_valid,
  input  logic                   pop,
  output logic [NUM_SYMBOLS-1:0] pops
);
  always_comb begin
    head       = '0;
    head_valid = 1'b0;
    pops       = '0;
    for (int s = 0; s < NUM_SYMBOLS; s++) begin
      if (sel == 4'(s)) begin
        head       = heads[s];
        head_valid = head_valids[s];
        pops[s]    = pop;
      end
    end
  end
endmodule
