// Pipeline control part of the control unit.
//
// Takes the frame, subframe, slot and symbol ids of the radio unit's time
// synchronisation and derives what the pipeline stages need:
//   next_slot   the frame/subframe/slot ids of the following slot, which the
//               scheduling units compare with their C-plane records. A subframe
//               (1 ms) holds 2^mu slots and a frame 10 subframes; frame ids wrap
//               at 256 as the 8-bit O-RAN frameId does.
//   next_symbol the symbol after the current one (13 wraps to 0)
//   cur_slot    the current slot ids, registered
//   swap        one clock after every change of slot, the trigger of the
//               slot-swap that restarts the type "2" unit
//   symb_sel    the current symbol, the select of the 14-to-1 multiplexer
// The outputs follow the paper's control unit diagram; the arithmetic is the NR
// frame structure. Outputs are registered: they follow the inputs by one clock.
module pipeline_control
  import sa_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] frame_id,
  input  logic [3:0] subframe_id,
  input  logic [5:0] slot_id,
  input  logic [3:0] symbol_id,
  input  logic [2:0] numerology,
  output slot_id_t   cur_slot,
  output slot_id_t   next_slot,
  output logic [3:0] next_symbol,
  output logic       swap,
  output logic [3:0] symb_sel
);
  logic [5:0] slots_per_sf;
  assign slots_per_sf = 6'd1 << numerology;

  slot_id_t nxt;
  always_comb begin
    nxt.frame    = frame_id;
    nxt.subframe = subframe_id;
    nxt.slot     = slot_id + 6'd1;
    if (slot_id + 6'd1 >= slots_per_sf) begin
      nxt.slot = '0;
      if (subframe_id >= 4'd9) begin
        nxt.subframe = '0;
        nxt.frame    = frame_id + 8'd1;
      end else begin
        nxt.subframe = subframe_id + 4'd1;
      end
    end
  end

  slot_id_t now;
  assign now = '{frame: frame_id, subframe: subframe_id, slot: slot_id};

  logic started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_slot    <= '0;
      next_slot   <= '0;
      next_symbol <= '0;
      swap        <= 1'b0;
      symb_sel    <= '0;
      started     <= 1'b0;
    end else begin
      started     <= 1'b1;
      cur_slot    <= now;
      next_slot   <= nxt;
      next_symbol <= (symbol_id >= 4'd13) ? 4'd0 : symbol_id + 4'd1;
      symb_sel    <= symbol_id;
      swap        <= started && (now != cur_slot);
    end
  end
endmodule
