// Shared types and constants of the Slice Agent.
//
// The Slice Agent sits in the uplink path of an O-RAN radio unit. It learns from
// C-plane messages which PRBs of which OFDM symbols belong to which slice (eAxC ID),
// keeps one packet list per symbol of the next slot, and during that slot emits one
// eCPRI/VLAN Ethernet frame per list entry, filled with IQ bytes from the low PHY.
//
// The 14 symbols per slot, the 273-PRB carrier and the 12-byte application overhead
// are the paper's numbers. Field widths follow the O-RAN fronthaul header fields the
// design carries (frameId 8 bit, subframeId 4 bit, slotId 6 bit, startPrb 10 bit).
package sa_pkg;

  localparam int unsigned NUM_SYMBOLS = 14;   // OFDM symbols per NR slot
  localparam int unsigned MAX_PRB     = 273;  // 100 MHz carrier, FR1, mu = 1
  localparam int unsigned O_APP       = 12;   // application overhead in bytes (Eq. PL)
  localparam int unsigned HDR_LEN     = 34;   // Ethernet+VLAN 18, eCPRI common 4, PC_ID/SEQ_ID 4, U-plane common 4, section 4
  localparam logic [15:0] ETHERTYPE_ECPRI = 16'hAEFE;
  localparam logic [15:0] TPID_VLAN       = 16'h8100;

  // Identifies one slot of the radio frame structure.
  typedef struct packed {
    logic [7:0] frame;
    logic [3:0] subframe;
    logic [5:0] slot;
  } slot_id_t;

  // One decoded C-plane section: what one slice uses in one slot.
  typedef struct packed {
    slot_id_t    slot;
    logic [15:0] eaxc_id;
    logic [11:0] section_id;
    logic [3:0]  start_sym;
    logic [3:0]  num_sym;
    logic [9:0]  start_prb;
    logic [8:0]  num_prb;
  } sched_rec_t;

  // One Ethernet packet to be built in one symbol.
  typedef struct packed {
    slot_id_t    slot;
    logic [15:0] eaxc_id;
    logic [11:0] section_id;
    logic [9:0]  start_prb;
    logic [8:0]  num_prb;
  } pkt_info_t;

  // General parameters held by the control unit.
  typedef struct packed {
    logic [47:0] src_mac;
    logic [47:0] dst_mac;
    logic [4:0]  iq_width;     // IQ sample width in bits, 1..16
    logic [2:0]  numerology;   // mu, 0..4
    logic        freq_range;   // 0 = FR1, 1 = FR2
    logic [8:0]  max_prb_pkt;  // PRBs that fit in one Ethernet packet
  } sa_cfg_t;

  localparam sa_cfg_t CFG_DEFAULT = '{
    src_mac:     48'h02_00_00_00_00_01,
    dst_mac:     48'h02_00_00_00_00_02,
    iq_width:    5'd16,
    numerology:  3'd1,
    freq_range:  1'b0,
    max_prb_pkt: 9'd30
  };

  // Mask of the symbols start .. start+num-1, clipped to the 14 symbols of a slot.
  function automatic logic [NUM_SYMBOLS-1:0] symbol_mask(input logic [3:0] start,
                                                          input logic [3:0] num);
    logic [NUM_SYMBOLS-1:0] m;
    for (int i = 0; i < NUM_SYMBOLS; i++)
      m[i] = (i >= int'(start)) && (i < int'(start) + int'(num));
    return m;
  endfunction

endpackage
