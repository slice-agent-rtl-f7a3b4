// Slice management part of the control unit: the list of type "1" slices.
//
// A list of LIST_SIZE eAxC IDs, each with a valid bit. The C-plane decoder asks
// whether an eAxC ID is in the list (check_id -> check_valid); every entry is
// compared at once, combinationally, which is why the paper keeps this list in
// registers rather than block RAM and why its cost grows with its size (32
// entries in the paper's build). add stores wr_id in the lowest free entry
// unless it is already listed; remove clears the entry holding wr_id. A slice is
// added or removed in one clock; an add to a full list is refused and reported
// on add_fail. add and remove in the same clock: remove wins. The list contents
// and the lookup are the paper's; the entry allocation is this design's.
module slice_list #(
  parameter int unsigned LIST_SIZE = 32,
  localparam int unsigned CW = $clog2(LIST_SIZE + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          add,
  input  logic          remove,
  input  logic [15:0]   wr_id,
  input  logic [15:0]   check_id,
  output logic          check_valid,
  output logic          add_fail,
  output logic [CW-1:0] n_slices
);
  logic [15:0]          ids   [LIST_SIZE];
  logic [LIST_SIZE-1:0] valid;

  // parallel lookups
  logic [LIST_SIZE-1:0] hit_check, hit_wr;
  always_comb begin
    for (int i = 0; i < LIST_SIZE; i++) begin
      hit_check[i] = valid[i] && (ids[i] == check_id);
      hit_wr[i]    = valid[i] && (ids[i] == wr_id);
    end
  end
  assign check_valid = |hit_check;

  // lowest free entry
  logic                 have_free;
  logic [$clog2(LIST_SIZE)-1:0] free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = LIST_SIZE - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        have_free = 1'b1;
        free_idx  = i[$clog2(LIST_SIZE)-1:0];
      end
    end
  end

  assign add_fail = add && !remove && !(|hit_wr) && !have_free;

  always_comb begin
    n_slices = '0;
    for (int i = 0; i < LIST_SIZE; i++) n_slices = n_slices + CW'(valid[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else if (remove) begin
      valid <= valid & ~hit_wr;
    end else if (add && !(|hit_wr) && have_free) begin
      valid[free_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (add && !remove && !(|hit_wr) && have_free) ids[free_idx] <= wr_id;
  end

  // duplicates are never stored, so a lookup hits at most one entry
  always_comb
    if (rst_n) assert ((hit_check & (hit_check - 1'b1)) == '0)
      else $error("slice list holds an eAxC ID twice");
endmodule
