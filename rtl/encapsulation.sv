// Encapsulation unit: builds one eCPRI-over-Ethernet U-plane frame per entry of
// the symbol buffer of the symbol now on air.
//
// Flow (the paper's encapsulation diagram): read the packet info from the selected
// symbol buffer, compute the payload length and start byte in the multiplication
// unit, send the start byte to the low PHY, send the headers, then forward IQ
// bytes from the low PHY until the payload is complete. Repeat while the buffer
// holds entries for the current slot; then wait for the next symbol.
//
// Frame layout, one byte per clock on the m_* stream (m_tlast on the last byte):
//   0..5  destination MAC     6..11 source MAC
//   12..13 0x8100 (802.1Q)    14..15 TCI: PCP 0, DEI 0, VLAN ID = eAxC ID[11:0]
//   16..17 0xAEFE (eCPRI)
//   18 0x10 (eCPRI revision 1)  19 0x00 (IQ data)  20..21 payload size = PL
//   22..23 eAxC ID (PC_ID)      24 sequence number  25 0x80 (E bit)
//   26 0x10 (uplink, payloadVersion 1)  27 frameId
//   28..29 subframeId(4) slotId(6) symbolId(6)
//   30..33 sectionId(12) rb=0 symInc=0 startPrbu(10) numPrbu(8, 0 = above 255)
//   34..   PL - 12 = 3 * iq_width * num_prb IQ bytes from the low PHY
// The VLAN tag carrying the slice identity, the eCPRI header and the 12-byte
// application overhead follow the paper; the mapping VLAN ID = low 12 bits of the
// eAxC ID, PCP 0 and one sequence counter for all flows are this design's choices.
//
// An entry whose slot is neither the current nor the next slot can never be sent
// (it was scheduled too late); it is discarded and reported on late_drop so that
// it cannot block its buffer. Entries for the next slot are left in place.
//
// Low-PHY interface: phy_start pulses for one clock with phy_start_byte, the
// offset of the first IQ byte of the packet within the symbol; the low PHY then
// supplies bytes on phy_tdata/phy_tvalid, taken when phy_tready is high.
module encapsulation
  import sa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic [47:0] src_mac,
  input  logic [47:0] dst_mac,
  input  logic [4:0]  iq_width,
  // timing
  input  slot_id_t    cur_slot,
  input  slot_id_t    next_slot,
  input  logic [3:0]  cur_symbol,
  // selected symbol buffer
  input  pkt_info_t   head,
  input  logic        head_valid,
  output logic        pop,
  // low PHY
  output logic        phy_start,
  output logic [15:0] phy_start_byte,
  input  logic [7:0]  phy_tdata,
  input  logic        phy_tvalid,
  output logic        phy_tready,
  // Ethernet transceiver
  output logic [7:0]  m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  // status
  output logic        pkt_sent,
  output logic        late_drop
);
  typedef enum logic [1:0] {S_IDLE, S_MUL, S_HDR, S_DATA} state_t;
  state_t state;

  pkt_info_t   info;
  logic [3:0]  sym_q;
  logic [7:0]  seq_q;
  logic [5:0]  hidx;
  logic [15:0] remain;
  logic        mul_valid;
  logic [15:0] payload_len, start_byte;

  logic take, late;
  assign take = (state == S_IDLE) && head_valid && (head.slot == cur_slot);
  assign late = (state == S_IDLE) && head_valid && (head.slot != cur_slot) &&
                (head.slot != next_slot);
  assign pop       = take || late;
  assign late_drop = late;

  mult_unit u_mult (
    .clk, .rst_n,
    .in_valid(take), .iq_width,
    .start_prb(head.start_prb), .num_prb(head.num_prb),
    .out_valid(mul_valid), .payload_len, .start_byte
  );

  assign phy_start      = (state == S_MUL) && mul_valid;
  assign phy_start_byte = start_byte;

  logic [7:0] hdr_byte;
  always_comb begin
    unique case (hidx)
      6'd0:  hdr_byte = dst_mac[47:40];
      6'd1:  hdr_byte = dst_mac[39:32];
      6'd2:  hdr_byte = dst_mac[31:24];
      6'd3:  hdr_byte = dst_mac[23:16];
      6'd4:  hdr_byte = dst_mac[15:8];
      6'd5:  hdr_byte = dst_mac[7:0];
      6'd6:  hdr_byte = src_mac[47:40];
      6'd7:  hdr_byte = src_mac[39:32];
      6'd8:  hdr_byte = src_mac[31:24];
      6'd9:  hdr_byte = src_mac[23:16];
      6'd10: hdr_byte = src_mac[15:8];
      6'd11: hdr_byte = src_mac[7:0];
      6'd12: hdr_byte = TPID_VLAN[15:8];
      6'd13: hdr_byte = TPID_VLAN[7:0];
      6'd14: hdr_byte = {4'b0000, info.eaxc_id[11:8]};
      6'd15: hdr_byte = info.eaxc_id[7:0];
      6'd16: hdr_byte = ETHERTYPE_ECPRI[15:8];
      6'd17: hdr_byte = ETHERTYPE_ECPRI[7:0];
      6'd18: hdr_byte = 8'h10;
      6'd19: hdr_byte = 8'h00;
      6'd20: hdr_byte = payload_len[15:8];
      6'd21: hdr_byte = payload_len[7:0];
      6'd22: hdr_byte = info.eaxc_id[15:8];
      6'd23: hdr_byte = info.eaxc_id[7:0];
      6'd24: hdr_byte = seq_q;
      6'd25: hdr_byte = 8'h80;
      6'd26: hdr_byte = 8'h10;
      6'd27: hdr_byte = info.slot.frame;
      6'd28: hdr_byte = {info.slot.subframe, info.slot.slot[5:2]};
      6'd29: hdr_byte = {info.slot.slot[1:0], 2'b00, sym_q};
      6'd30: hdr_byte = info.section_id[11:4];
      6'd31: hdr_byte = {info.section_id[3:0], 2'b00, info.start_prb[9:8]};
      6'd32: hdr_byte = info.start_prb[7:0];
      6'd33: hdr_byte = (info.num_prb > 9'd255) ? 8'd0 : info.num_prb[7:0];
      default: hdr_byte = 8'h00;
    endcase
  end

  always_comb begin
    m_tvalid   = 1'b0;
    m_tdata    = hdr_byte;
    m_tlast    = 1'b0;
    phy_tready = 1'b0;
    if (state == S_HDR) begin
      m_tvalid = 1'b1;
    end else if (state == S_DATA) begin
      m_tvalid   = phy_tvalid;
      m_tdata    = phy_tdata;
      m_tlast    = (remain == 16'd1);
      phy_tready = m_tready;
    end
  end

  assign pkt_sent = (state == S_DATA) && phy_tvalid && m_tready && (remain == 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      info   <= '0;
      sym_q  <= '0;
      seq_q  <= '0;
      hidx   <= '0;
      remain <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (take) begin
          info  <= head;
          sym_q <= cur_symbol;
          state <= S_MUL;
        end
        S_MUL: if (mul_valid) begin
          hidx   <= '0;
          remain <= payload_len - 16'(O_APP);
          state  <= S_HDR;
        end
        S_HDR: if (m_tready) begin
          if (hidx == 6'(HDR_LEN - 1)) state <= S_DATA;
          else                         hidx  <= hidx + 6'd1;
        end
        S_DATA: if (phy_tvalid && m_tready) begin
          remain <= remain - 16'd1;
          if (remain == 16'd1) begin
            seq_q <= seq_q + 8'd1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
