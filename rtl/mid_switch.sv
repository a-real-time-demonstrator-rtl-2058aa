// mid_switch: one Mid-Switch segment, two 4-way dispatchers side by side.
//
// Input lines 0-3 enter the first dispatcher_4d, lines 4-7 the second. Output
// j is sent over the lateral mesh to board j: outputs 0-3 come from the first
// 4d, 4-7 from the second. Each input line therefore reaches four of the eight
// boards. Splitters are numbered UNIT_BASE..UNIT_BASE+7 in the first 4d and
// UNIT_BASE+8..UNIT_BASE+15 in the second. The two side-by-side 4d follow the
// paper; which output goes to which board is this design's choice.
module mid_switch
  import retina_pkg::*;
#(
  parameter int unsigned UNIT_BASE = 0,
  parameter int unsigned BOARD_ID  = 0,
  parameter int unsigned DEPTH     = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  cfg_t       cfg,
  input  logic [7:0] in_valid,
  output logic [7:0] in_ready,
  input  word_t      in_data  [8],
  output logic [7:0] out_valid,
  input  logic [7:0] out_ready,
  output word_t      out_data [8],
  output logic       dup,
  output logic       drop,
  output logic       sync_err
);
  logic [1:0] h_dup, h_drop, h_err;

  for (genvar h = 0; h < 2; h++) begin : g_half
    word_t i_data [4];
    word_t o_data [4];
    for (genvar k = 0; k < 4; k++) begin : g_k
      assign i_data[k]       = in_data[4*h + k];
      assign out_data[4*h+k] = o_data[k];
    end
    dispatcher_4d #(.UNIT_BASE(UNIT_BASE + 8*h), .BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_4d (
      .clk, .rst_n, .cfg,
      .in_valid (in_valid[4*h+3 -: 4]), .in_ready(in_ready[4*h+3 -: 4]), .in_data(i_data),
      .out_valid(out_valid[4*h+3 -: 4]), .out_ready(out_ready[4*h+3 -: 4]), .out_data(o_data),
      .dup(h_dup[h]), .drop(h_drop[h]), .sync_err(h_err[h])
    );
  end

  assign dup      = |h_dup;
  assign drop     = |h_drop;
  assign sync_err = |h_err;

endmodule
