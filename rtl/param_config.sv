// Parameter configuration part of the control unit.
//
// Holds the general parameters of the Slice Agent that the management plane sets:
// source and destination MAC addresses, IQ sample width, numerology, frequency
// range and the maximum number of PRBs in one Ethernet packet (the paper's list of
// parameters). All fields are loaded together on cfg_we. Values that the datapath
// cannot use are corrected on loading, which is this design's choice: an IQ width
// of 0 is read as 16 (the O-RAN encoding of 16-bit samples) and widths above 16
// are clipped to 16; a maximum of 0 PRBs per packet is read as 1; a numerology
// above 4 is clipped to 4. Reset loads CFG_DEFAULT (16-bit IQ, mu = 1, FR1,
// 30 PRBs per packet, which is what a 1500-byte MTU allows with 16-bit IQ).
module param_config
  import sa_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cfg_we,
  input  sa_cfg_t cfg_in,
  output sa_cfg_t cfg
);
  sa_cfg_t fixed;
  always_comb begin
    fixed = cfg_in;
    if (cfg_in.iq_width == 5'd0 || cfg_in.iq_width > 5'd16) fixed.iq_width = 5'd16;
    if (cfg_in.max_prb_pkt == 9'd0)                         fixed.max_prb_pkt = 9'd1;
    if (cfg_in.numerology > 3'd4)                           fixed.numerology = 3'd4;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cfg <= CFG_DEFAULT;
    else if (cfg_we) cfg <= fixed;
  end
endmodule
