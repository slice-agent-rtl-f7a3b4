// Scheduling process of one scheduling unit (type "1" or type "2").
//
// Turns slice-oriented C-plane records into symbol-oriented packet lists. It looks
// at the head of its decoded C-plane FIFO and compares the record's frame,
// subframe and slot with the ids of the next slot given by the control unit. A
// matching record is split into n = ceil(num_prb / max_prb_pkt) packets of at
// most max_prb_pkt PRBs, the last one taking the remainder. Each packet costs two
// clocks: one to compute its start PRB and size (CALC) and one to write it
// (WRITE) through the 1x14 demultiplexer into every symbol buffer the record
// covers, all symbols in parallel. A run over the FIFO opens with one START clock
// and ends with one clock that finds nothing more to do, so a run over N matching
// slices takes 1 + sum(2 * n_pkt) + 1 clocks, the paper's processing-time
// equation.
//
// SLICE_TYPE = 1: a run starts whenever the head matches the next slot and stops
// at the first head that does not; such a head blocks the unit until its slot
// comes (a record for a past slot blocks it for good, as the paper warns).
// SLICE_TYPE = 2: a run (a "pass") starts after each slot change (swap) and after
// each new record; it visits exactly the records present when it starts. A
// record for another slot is popped and written back to the FIFO tail in one
// clock (reins_en), waiting while the decoder is using the FIFO write port, and
// a packet write waits while the type "1" unit writes one of the same symbols
// (wr_ready low).
//
// The comparison with the next slot, the two-clock-per-packet cost, the parallel
// symbol write and the two reinsertion behaviours are the paper's; the exact
// state machine and the pass trigger are this design's. With SLICE_TYPE 1 (the
// default) reins_en is constant 0, since a type "1" unit never writes back.
module sched_process
  import sa_pkg::*;
#(
  parameter int unsigned SLICE_TYPE = 1,
  parameter int unsigned CW = 11          // width of the FIFO occupancy count
) (
  input  logic          clk,
  input  logic          rst_n,
  // FIFO side
  input  sched_rec_t    head,
  input  logic          head_valid,
  input  logic [CW-1:0] count,
  input  logic          new_entry,
  output logic          pop,
  output logic          reins_en,
  input  logic          reins_ready,
  // timing and configuration from the control unit
  input  slot_id_t      next_slot,
  input  logic          swap,
  input  logic [8:0]    max_prb_pkt,
  // output through the 1x14 demultiplexer
  output pkt_info_t     pkt,
  output logic [NUM_SYMBOLS-1:0] sym_wr,  // request, taken when wr_ready
  input  logic          wr_ready,
  // status
  output logic          busy,
  output logic          slice_done    // one clock per slice fully written
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_CALC, S_WRITE} state_t;
  state_t state;

  logic [NUM_SYMBOLS-1:0] mask_q;
  logic [8:0]  left_q;       // PRBs of the current slice not yet packed
  logic [9:0]  next_start_q; // start PRB of the next packet of the current slice
  logic        in_slice_q;
  logic [CW-1:0] pass_left_q;
  logic        pend_q;       // type 2: a pass is due

  logic [8:0] eff_max;
  assign eff_max = (max_prb_pkt == '0) ? 9'd1 : max_prb_pkt;

  logic head_match;
  assign head_match = head_valid && (head.slot == next_slot);

  // end of the current run
  logic run_end;
  always_comb begin
    if (SLICE_TYPE == 1) run_end = !head_match;
    else                 run_end = (pass_left_q == '0) || !head_valid;
  end

  logic [8:0] n_head, n_cont;
  assign n_head = (head.num_prb > eff_max) ? eff_max : head.num_prb;
  assign n_cont = (left_q > eff_max) ? eff_max : left_q;

  assign busy   = (state != S_IDLE);
  // write request; the write takes place in a clock where wr_ready is high
  assign sym_wr = (state == S_WRITE) ? mask_q : '0;

  always_comb begin
    pop        = 1'b0;
    reins_en   = 1'b0;
    slice_done = 1'b0;
    if (state == S_WRITE && wr_ready && left_q == '0) begin
      pop        = 1'b1;
      slice_done = 1'b1;
    end
    if (SLICE_TYPE == 2 && state == S_CALC && !in_slice_q && !run_end && !head_match
        && reins_ready) begin
      pop      = 1'b1;
      reins_en = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      pkt          <= '0;
      mask_q       <= '0;
      left_q       <= '0;
      next_start_q <= '0;
      in_slice_q   <= 1'b0;
      pass_left_q  <= '0;
      pend_q       <= 1'b0;
    end else begin
      if (SLICE_TYPE == 2 && (swap || new_entry)) pend_q <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (SLICE_TYPE == 1) begin
            if (head_match) state <= S_START;
          end else if (pend_q && count != '0) begin
            state       <= S_START;
            pass_left_q <= count;
            if (!(swap || new_entry)) pend_q <= 1'b0;
          end
        end
        S_START: state <= S_CALC;
        S_CALC: begin
          if (in_slice_q) begin
            pkt.start_prb <= next_start_q;
            pkt.num_prb   <= n_cont;
            left_q        <= left_q - n_cont;
            next_start_q  <= next_start_q + 10'(n_cont);
            state         <= S_WRITE;
          end else if (run_end) begin
            state <= S_IDLE;
          end else if (head_match) begin
            pkt.slot       <= head.slot;
            pkt.eaxc_id    <= head.eaxc_id;
            pkt.section_id <= head.section_id;
            pkt.start_prb  <= head.start_prb;
            pkt.num_prb    <= n_head;
            mask_q         <= symbol_mask(head.start_sym, head.num_sym);
            left_q         <= head.num_prb - n_head;
            next_start_q   <= head.start_prb + 10'(n_head);
            in_slice_q     <= 1'b1;
            state          <= S_WRITE;
          end else if (reins_ready) begin
            // type 2 only: record for another slot goes back to the tail
            pass_left_q <= pass_left_q - 1'b1;
          end
        end
        S_WRITE: begin
          if (wr_ready) begin
            state <= S_CALC;
            if (left_q == '0) begin
              in_slice_q <= 1'b0;
              if (SLICE_TYPE == 2) pass_left_q <= pass_left_q - 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (SLICE_TYPE == 1 || SLICE_TYPE == 2)
      else $error("sched_process: SLICE_TYPE must be 1 or 2");
  end
endmodule
