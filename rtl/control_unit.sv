// Control unit of the Slice Agent: parameter configuration, slice management and
// pipeline control, the three parts of the paper's control unit diagram.
//
// The management plane loads the general parameters (cfg_we, cfg_in) and adds or
// removes type "1" slices by eAxC ID. The C-plane decoder looks eAxC IDs up in
// the slice list (id_check -> id_valid, combinational). The time
// synchronisation ids drive the pipeline control, which gives the next slot to
// the scheduling units, the swap strobe at each slot change, and the symbol
// select of the 14-to-1 multiplexer (all one clock after the ids).
module control_unit
  import sa_pkg::*;
#(
  parameter int unsigned LIST_SIZE = 32,
  localparam int unsigned LCW = $clog2(LIST_SIZE + 1)
) (
  input  logic       clk,
  input  logic       rst_n,
  // management plane
  input  logic       cfg_we,
  input  sa_cfg_t    cfg_in,
  input  logic       slice_add,
  input  logic       slice_remove,
  input  logic [15:0] slice_id,
  output logic       slice_add_fail,
  output logic [LCW-1:0] n_type1_slices,
  // lookup by the C-plane decoder
  input  logic [15:0] id_check,
  output logic       id_valid,
  // time synchronisation
  input  logic [7:0] frame_id,
  input  logic [3:0] subframe_id,
  input  logic [5:0] slot_id,
  input  logic [3:0] symbol_id,
  // to the pipeline
  output sa_cfg_t    cfg,
  output slot_id_t   cur_slot,
  output slot_id_t   next_slot,
  output logic [3:0] next_symbol,
  output logic       swap,
  output logic [3:0] symb_sel
);
  param_config u_param (
    .clk, .rst_n, .cfg_we, .cfg_in, .cfg
  );

  slice_list #(.LIST_SIZE(LIST_SIZE)) u_list (
    .clk, .rst_n,
    .add(slice_add), .remove(slice_remove), .wr_id(slice_id),
    .check_id(id_check), .check_valid(id_valid),
    .add_fail(slice_add_fail), .n_slices(n_type1_slices)
  );

  pipeline_control u_pipe (
    .clk, .rst_n,
    .frame_id, .subframe_id, .slot_id, .symbol_id,
    .numerology(cfg.numerology),
    .cur_slot, .next_slot, .next_symbol, .swap, .symb_sel
  );
endmodule
