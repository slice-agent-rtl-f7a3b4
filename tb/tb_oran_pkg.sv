// Testbench helpers: builds O-RAN C-plane section-type-1 messages as byte
// queues, independently of the RTL, and gives the IQ byte pattern of the
// behavioural low PHY used by the testbenches.
//
// build_msg() lays out the eCPRI common header, the section-type-1 common
// fields and one 8-byte block per section; phy_byte() gives the byte a
// symbol's IQ stream holds at a given offset, so frames can be checked without
// storing symbols. The layout is the O-RAN one this design assumes.
package tb_oran_pkg;

  typedef struct {
    int eaxc;
    int frame, subframe, slot, start_sym;
    int section_id, start_prb, num_prb, num_sym;  // num_prb 0 = all remaining PRBs
  } tb_section_t;

  // One message with one or more sections sharing the header fields of s[0].
  // dir = 0 uplink; msg_type 2 = real-time control; sect_type 1.
  function automatic void build_msg(ref byte unsigned m[$], input tb_section_t s[$],
                                    input int dir = 0, input int msg_type = 2,
                                    input int sect_type = 1);
    int plen;
    m.delete();
    plen = 12 + 8 * s.size();
    m.push_back(8'h10); m.push_back(8'(msg_type));
    m.push_back(8'(plen >> 8)); m.push_back(8'(plen));
    m.push_back(8'(s[0].eaxc >> 8)); m.push_back(8'(s[0].eaxc));
    m.push_back(8'h00); m.push_back(8'h80);
    m.push_back(8'((dir << 7) | (1 << 4)));
    m.push_back(8'(s[0].frame));
    m.push_back(8'((s[0].subframe << 4) | (s[0].slot >> 2)));
    m.push_back(8'(((s[0].slot & 3) << 6) | s[0].start_sym));
    m.push_back(8'(s.size()));
    m.push_back(8'(sect_type));
    m.push_back(8'h00); m.push_back(8'h00);
    foreach (s[k]) begin
      m.push_back(8'(s[k].section_id >> 4));
      m.push_back(8'(((s[k].section_id & 15) << 4) | (s[k].start_prb >> 8)));
      m.push_back(8'(s[k].start_prb));
      m.push_back(8'(s[k].num_prb));
      m.push_back(8'hFF);
      m.push_back(8'hF0 | 8'(s[k].num_sym));
      m.push_back(8'h00); m.push_back(8'h00);
    end
  endfunction

  // IQ byte the behavioural low PHY returns at byte offset off of symbol sym.
  function automatic byte unsigned phy_byte(input int sym, input int off);
    return 8'((off * 7) ^ (off >> 8) ^ (sym * 29) ^ 8'h5A);
  endfunction

endpackage
