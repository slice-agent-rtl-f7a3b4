// Synchronous first-word-fall-through FIFO used for the decoded C-plane FIFOs and
// the symbol buffers. The head entry is visible on rd_data whenever empty is low;
// rd_en pops it. A write while full is ignored (the caller counts it as lost); a
// write and a pop in the same cycle are both accepted when the FIFO is full, so a
// popped entry can be written back at once. Storage is a plain array so that an
// FPGA tool can map it to block RAM. Reset empties the FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [CW-1:0]    count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  logic do_rd, do_wr;
  assign do_rd = rd_en && !empty;
  assign do_wr = wr_en && (!full || do_rd);

  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end
endmodule
