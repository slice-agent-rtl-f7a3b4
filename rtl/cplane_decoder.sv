// C-plane message decoder of the Slice Agent.
//
// Receives one O-RAN C-plane message at a time as a byte stream (AXI4-Stream
// style, one byte per clock, s_tlast on the last byte), starting at the eCPRI
// common header. It checks that the message is an eCPRI real-time control message
// (type 0x02) for the uplink (dataDirection 0) with section type 1, extracts the
// eAxC ID, frame, subframe, slot and start symbol from the common header and, for
// each section, the section ID, start PRB, number of PRBs and number of symbols.
//
// As soon as the eAxC ID has been received it is shown to the control unit's
// slice list on id_check; the answer id_valid is sampled two bytes later. Every
// section then yields one decoded record, written to the type "1" scheduling unit
// when the eAxC ID is in the list and to the type "2" unit otherwise. This routing
// rule is the paper's. The byte layout is the O-RAN section-type-1 layout:
//   0..3   eCPRI common header (byte 1 = message type)
//   4..5   ecpriRtcid = eAxC ID, 6..7 sequence ID
//   8      dataDirection / payloadVersion / filterIndex
//   9      frameId, 10..11 subframeId(4) slotId(6) startSymbolId(6)
//   12     numberOfSections, 13 sectionType, 14 udCompHdr, 15 reserved
//   16+8k  section k: sectionId(12) rb symInc startPrbc(10), numPrbc(8),
//          reMask(12) numSymbol(4), ef beamId(15)
// numPrbc = 0 means "all PRBs from startPrbc to the top of the carrier", as in
// O-RAN. The stream is never back-pressured (s_tready is constant 1): the
// decoder takes a byte every clock. The record appears one clock after byte 5 of
// its section (rec_t1 or rec_t2 high for one clock).
module cplane_decoder
  import sa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // C-plane byte stream
  input  logic [7:0]  s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  // slice-list lookup in the control unit (eCPRIIdCheck / eCpriValid)
  output logic [15:0] id_check,
  input  logic        id_valid,
  // decoded records
  output sched_rec_t  rec,
  output logic        rec_t1,
  output logic        rec_t2,
  output logic        msg_reject   // one clock when a message is not an uplink section-type-1 message
);
  logic [15:0] idx;          // byte index inside the message
  logic        ok;           // message passes the type checks so far
  logic        is_t1;        // eAxC ID found in the slice list
  logic [7:0]  n_sect;       // numberOfSections
  logic [7:0]  sect_cnt;     // sections seen
  logic [2:0]  sect_off;     // byte offset inside a section
  sched_rec_t  cur;          // record under construction

  assign s_tready = 1'b1;
  assign id_check = cur.eaxc_id;

  logic [8:0] prb_field_num;
  always_comb begin
    // numPrbc = 0 selects every PRB from startPrbc upward.
    if (s_tdata == 8'd0) prb_field_num = 9'(MAX_PRB) - 9'(cur.start_prb);
    else                 prb_field_num = {1'b0, s_tdata};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx        <= '0;
      ok         <= 1'b0;
      is_t1      <= 1'b0;
      n_sect     <= '0;
      sect_cnt   <= '0;
      sect_off   <= '0;
      cur        <= '0;
      rec        <= '0;
      rec_t1     <= 1'b0;
      rec_t2     <= 1'b0;
      msg_reject <= 1'b0;
    end else begin
      rec_t1     <= 1'b0;
      rec_t2     <= 1'b0;
      msg_reject <= 1'b0;
      if (s_tvalid) begin
        if (idx != 16'hFFFF) idx <= idx + 16'd1;
        unique case (idx)
          16'd0:  begin ok <= 1'b1; sect_cnt <= '0; sect_off <= '0; end
          16'd1:  if (s_tdata != 8'h02) ok <= 1'b0;           // real-time control data
          16'd4:  cur.eaxc_id[15:8] <= s_tdata;
          16'd5:  cur.eaxc_id[7:0]  <= s_tdata;
          16'd7:  is_t1 <= id_valid;                           // list answer for the eAxC ID
          16'd8:  if (s_tdata[7] != 1'b0) ok <= 1'b0;          // uplink only
          16'd9:  cur.slot.frame <= s_tdata;
          16'd10: begin
                    cur.slot.subframe  <= s_tdata[7:4];
                    cur.slot.slot[5:2] <= s_tdata[3:0];
                  end
          16'd11: begin
                    cur.slot.slot[1:0] <= s_tdata[7:6];
                    cur.start_sym      <= s_tdata[3:0];
                    if (s_tdata[5:0] >= 6'(NUM_SYMBOLS)) ok <= 1'b0;
                  end
          16'd12: n_sect <= s_tdata;
          16'd13: if (s_tdata != 8'h01) ok <= 1'b0;            // section type 1
          default: begin
            if (idx >= 16'd16) begin
              sect_off <= sect_off + 3'd1;
              unique case (sect_off)
                3'd0: cur.section_id[11:4] <= s_tdata;
                3'd1: begin
                        cur.section_id[3:0]  <= s_tdata[7:4];
                        cur.start_prb[9:8]   <= s_tdata[1:0];
                      end
                3'd2: cur.start_prb[7:0] <= s_tdata;
                3'd3: cur.num_prb        <= prb_field_num;
                3'd5: begin
                        if (ok && sect_cnt < n_sect && s_tdata[3:0] != 4'd0) begin
                          rec         <= cur;
                          rec.num_sym <= s_tdata[3:0];
                          rec_t1      <= is_t1;
                          rec_t2      <= !is_t1;
                        end
                        sect_cnt <= sect_cnt + 8'd1;
                      end
                default: ;
              endcase
            end
          end
        endcase
        if (idx == 16'd14 && !ok) msg_reject <= 1'b1;
        if (s_tlast) idx <= '0;
      end
    end
  end
endmodule
