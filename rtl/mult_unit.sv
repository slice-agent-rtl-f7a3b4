// Multiplication unit of the encapsulation stage.
//
// A PRB holds 12 subcarriers, each an I and a Q sample of iq_width bits, so it
// takes 3 * iq_width bytes. The unit computes, from the packet info just read,
//   payload_len = 3 * iq_width * num_prb + 12   (eCPRI payload: 4 bytes of eCPRI
//                 PC_ID/SEQ_ID, 4 of U-plane common header, 4 of section header)
//   start_byte  = 3 * iq_width * start_prb      (offset of the first IQ byte in
//                 the symbol, requested from the low PHY)
// both equations and the overhead of 12 being the paper's. Both products are
// computed in parallel with multipliers (DSP blocks on an FPGA), registered, so
// the results appear one clock after in_valid (out_valid).
module mult_unit
  import sa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [4:0]  iq_width,
  input  logic [9:0]  start_prb,
  input  logic [8:0]  num_prb,
  output logic        out_valid,
  output logic [15:0] payload_len,
  output logic [15:0] start_byte
);
  logic [6:0] bytes_per_prb;
  assign bytes_per_prb = 7'(iq_width) * 7'd3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      payload_len <= '0;
      start_byte  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        payload_len <= 16'(bytes_per_prb) * 16'(num_prb) + 16'(O_APP);
        start_byte  <= 16'(bytes_per_prb) * 16'(start_prb);
      end
    end
  end
endmodule
