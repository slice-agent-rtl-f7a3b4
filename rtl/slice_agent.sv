// Slice Agent: slice identification and isolation for the uplink of a shared
// O-RAN radio unit (top level).
//
// A radio unit shared by several DUs must send each slice's uplink IQ data to the
// right DU, yet only the DU's scheduler knows which PRBs belong to which slice.
// The agent learns it from the C-plane messages the DUs send ahead of the uplink
// data, and cuts the uplink into one eCPRI/VLAN Ethernet frame per slice, symbol
// and packet-sized group of PRBs, so that ordinary VLAN switches can steer each
// slice to its DU.
//
// Three pipeline stages, as in the paper:
//   1. cplane_decoder decodes each C-plane message and, asking the control unit's
//      slice list, sends it to the type "1" unit (listed, latency-critical
//      slices) or the type "2" unit (all others).
//   2. Two sched_unit instances each hold a decoded C-plane FIFO and turn the
//      records due in the next slot into packet info, written in parallel into the
//      14 symbol buffers through sym_write_mux (type "1" first). Stage 2 for slot
//      n+1 runs during slot n.
//   3. During slot n+1, the encapsulation unit reads the buffer of the current
//      symbol through sym_read_mux and emits the frames, asking the low PHY for
//      the IQ bytes from a start byte.
// The control unit holds the parameters and the slice list and derives the slot
// timing from the time synchronisation ids.
//
// Interfaces: C-plane messages come in as a byte stream starting at the eCPRI
// header (cp_tready is constant 1: the decoder takes a byte every clock);
// frames go out as a byte stream to the Ethernet MAC; the low PHY gets a
// start-byte strobe and returns IQ bytes as a stream; the management plane loads
// parameters and type "1" slices through plain strobes; counters expose FIFO
// occupancy, losses, write-backs and sent packets (the metrics the paper reads
// out), and status ports show the parameters in use, the symbol being
// encapsulated, the busy scheduling units and the symbol buffer fill levels.
// Sizes: FIFOs of 1024 records and symbol buffers of 512 entries and a 32-entry
// slice list are the paper's; the type "1" FIFO depth is not given and is taken
// equal to the type "2" depth.
// rst_n is also read by the FIFO's clocked assertion (see cplane_fifo), which
// lint tools report as a reset used both asynchronously and synchronously.
module slice_agent
  import sa_pkg::*;
#(
  parameter int unsigned T1_FIFO_DEPTH = 1024,
  parameter int unsigned T2_FIFO_DEPTH = 1024,
  parameter int unsigned SYM_BUF_DEPTH = 512,
  parameter int unsigned LIST_SIZE     = 32,
  localparam int unsigned C1W = $clog2(T1_FIFO_DEPTH + 1),
  localparam int unsigned C2W = $clog2(T2_FIFO_DEPTH + 1),
  localparam int unsigned SBW = $clog2(SYM_BUF_DEPTH + 1),
  localparam int unsigned LCW = $clog2(LIST_SIZE + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  // fronthaul C-plane messages
  input  logic [7:0]  cp_tdata,
  input  logic        cp_tvalid,
  input  logic        cp_tlast,
  output logic        cp_tready,
  // fronthaul M-plane
  input  logic        cfg_we,
  input  sa_cfg_t     cfg_in,
  input  logic        slice_add,
  input  logic        slice_remove,
  input  logic [15:0] slice_id,
  output logic        slice_add_fail,
  output logic [LCW-1:0] n_type1_slices,
  // time synchronisation
  input  logic [7:0]  frame_id,
  input  logic [3:0]  subframe_id,
  input  logic [5:0]  slot_id,
  input  logic [3:0]  symbol_id,
  // low PHY uplink
  output logic        phy_start,
  output logic [15:0] phy_start_byte,
  input  logic [7:0]  phy_tdata,
  input  logic        phy_tvalid,
  output logic        phy_tready,
  // Ethernet transceiver
  output logic [7:0]  eth_tdata,
  output logic        eth_tvalid,
  output logic        eth_tlast,
  input  logic        eth_tready,
  // metrics
  output logic [C1W-1:0] t1_fifo_count,
  output logic [C2W-1:0] t2_fifo_count,
  output logic [15:0] t1_drop_count,
  output logic [15:0] t2_drop_count,
  output logic [15:0] symbuf_overflow_count,
  output logic [15:0] late_drop_count,
  output logic [31:0] pkt_sent_count,
  output logic [15:0] reject_count,
  output logic [31:0] slices_done_count,   // slices fully scheduled, both units
  output logic [31:0] reinsert_count,      // type "2" records written back
  // status
  output sa_cfg_t     cfg_rd,              // parameters in use
  output logic [3:0]  symb_sel,            // symbol being encapsulated
  output logic [3:0]  next_symbol,         // symbol after it
  output logic [1:0]  sched_busy,          // {type 2, type 1} scheduling runs
  output logic [1:0]  fifo_drop,           // {type 2, type 1} record lost this clock
  output logic [SBW-1:0] symbuf_count [NUM_SYMBOLS]
);
  // ---------------- control unit ----------------
  slot_id_t   cur_slot, next_slot;
  logic       swap;
  logic [15:0] id_check;
  logic       id_valid;

  control_unit #(.LIST_SIZE(LIST_SIZE)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_in,
    .slice_add, .slice_remove, .slice_id,
    .slice_add_fail, .n_type1_slices,
    .id_check, .id_valid,
    .frame_id, .subframe_id, .slot_id, .symbol_id,
    .cfg(cfg_rd), .cur_slot, .next_slot, .next_symbol, .swap, .symb_sel
  );

  // ---------------- stage 1: C-plane decoding ----------------
  sched_rec_t rec;
  logic       rec_t1, rec_t2, msg_reject;

  cplane_decoder u_dec (
    .clk, .rst_n,
    .s_tdata(cp_tdata), .s_tvalid(cp_tvalid), .s_tlast(cp_tlast), .s_tready(cp_tready),
    .id_check, .id_valid,
    .rec, .rec_t1, .rec_t2, .msg_reject
  );

  // ---------------- stage 2: scheduling data processing ----------------
  pkt_info_t t1_pkt, t2_pkt;
  logic [NUM_SYMBOLS-1:0] t1_wr, t2_wr;
  logic t2_ready;
  logic t1_done, t2_done, t1_reins, t2_reins;

  sched_unit #(.SLICE_TYPE(1), .FIFO_DEPTH(T1_FIFO_DEPTH)) u_type1 (
    .clk, .rst_n,
    .wr_en(rec_t1), .wr_data(rec),
    .next_slot, .swap, .max_prb_pkt(cfg_rd.max_prb_pkt),
    .pkt(t1_pkt), .sym_wr(t1_wr), .wr_ready(1'b1),
    .fifo_count(t1_fifo_count), .drop(fifo_drop[0]), .drop_count(t1_drop_count),
    .busy(sched_busy[0]), .slice_done(t1_done), .reinsert(t1_reins)
  );

  sched_unit #(.SLICE_TYPE(2), .FIFO_DEPTH(T2_FIFO_DEPTH)) u_type2 (
    .clk, .rst_n,
    .wr_en(rec_t2), .wr_data(rec),
    .next_slot, .swap, .max_prb_pkt(cfg_rd.max_prb_pkt),
    .pkt(t2_pkt), .sym_wr(t2_wr), .wr_ready(t2_ready),
    .fifo_count(t2_fifo_count), .drop(fifo_drop[1]), .drop_count(t2_drop_count),
    .busy(sched_busy[1]), .slice_done(t2_done), .reinsert(t2_reins)
  );

  logic [NUM_SYMBOLS-1:0] buf_wr;
  pkt_info_t              buf_data [NUM_SYMBOLS];

  sym_write_mux u_wmux (
    .t1_wr, .t1_pkt, .t2_wr, .t2_pkt, .t2_ready, .buf_wr, .buf_data
  );

  pkt_info_t              heads [NUM_SYMBOLS];
  logic [NUM_SYMBOLS-1:0] head_valids, pops, ovf;

  for (genvar s = 0; s < NUM_SYMBOLS; s++) begin : g_symbuf
    symbol_buffer #(.DEPTH(SYM_BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_en(buf_wr[s]), .wr_data(buf_data[s]),
      .rd_pop(pops[s]), .head(heads[s]), .head_valid(head_valids[s]),
      .count(symbuf_count[s]), .overflow(ovf[s])
    );
  end

  // ---------------- stage 3: encapsulation ----------------
  pkt_info_t sel_head;
  logic      sel_valid, sel_pop, pkt_sent, late_drop;

  sym_read_mux u_rmux (
    .sel(symb_sel), .heads, .head_valids,
    .head(sel_head), .head_valid(sel_valid), .pop(sel_pop), .pops
  );

  encapsulation u_encap (
    .clk, .rst_n,
    .src_mac(cfg_rd.src_mac), .dst_mac(cfg_rd.dst_mac), .iq_width(cfg_rd.iq_width),
    .cur_slot, .next_slot, .cur_symbol(symb_sel),
    .head(sel_head), .head_valid(sel_valid), .pop(sel_pop),
    .phy_start, .phy_start_byte, .phy_tdata, .phy_tvalid, .phy_tready,
    .m_tdata(eth_tdata), .m_tvalid(eth_tvalid), .m_tlast(eth_tlast), .m_tready(eth_tready),
    .pkt_sent, .late_drop
  );

  // ---------------- metrics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      symbuf_overflow_count <= '0;
      late_drop_count       <= '0;
      pkt_sent_count        <= '0;
      reject_count          <= '0;
      slices_done_count     <= '0;
      reinsert_count        <= '0;
    end else begin
      // a type "1" unit never writes back; its flag is counted for symmetry
      slices_done_count <= slices_done_count + 32'(t1_done) + 32'(t2_done);
      reinsert_count    <= reinsert_count + 32'(t1_reins) + 32'(t2_reins);
      if (|ovf)       symbuf_overflow_count <= symbuf_overflow_count + 16'd1;
      if (late_drop)  late_drop_count       <= late_drop_count + 16'd1;
      if (pkt_sent)   pkt_sent_count        <= pkt_sent_count + 32'd1;
      if (msg_reject) reject_count          <= reject_count + 16'd1;
    end
  end
endmodule
