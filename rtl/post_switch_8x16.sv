// post_switch_8x16: one Post-Switch segment, an 8-input 16-output dispatcher.
//
// The plain 8-way dispatcher (three layers of 2d) has its first layer replaced
// by eight splitters and its two lower layers doubled, so that every TPU gets
// two lines from this segment instead of one. Input i comes from board i over
// the lateral mesh. Inputs 0,1,6,7 feed copy 0 and inputs 2,3,4,5 copy 1.
// Inside a copy, its four splitters make eight lines; line 2k+o is output o of
// splitter k. A first layer of four 2d pairs line m (L) with line m+4 (R), and
// a second layer pairs first-layer output m (L) with output m+4 (R); 2d m of
// the second layer drives TPUs 2m and 2m+1. Every input reaches every TPU.
// Output 8*c + t is the line of copy c into TPU t.
// Splitter numbering: copy c uses UNIT_BASE+20c (4 splitters), then +4 (first
// 2d layer, 8 splitters), then +12 (second 2d layer, 8 splitters).
// The splitter layer, the doubled lower layers and the split of the inputs
// between the copies follow the paper; the line crossing inside a copy is this
// design's own shuffle wiring.
module post_switch_8x16
  import retina_pkg::*;
#(
  parameter int unsigned UNIT_BASE = 16,
  parameter int unsigned BOARD_ID  = 0,
  parameter int unsigned DEPTH     = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic [7:0]  in_valid,
  output logic [7:0]  in_ready,
  input  word_t       in_data  [8],
  output logic [15:0] out_valid,
  input  logic [15:0] out_ready,
  output word_t       out_data [16],
  output logic        dup,
  output logic        drop,
  output logic        sync_err
);
  // source input of copy c, slot k
  localparam int SRC [2][4] = '{'{0, 1, 6, 7}, '{2, 3, 4, 5}};

  logic [1:0] c_dup, c_drop, c_err;

  for (genvar c = 0; c < 2; c++) begin : g_copy
    localparam int unsigned BASE = UNIT_BASE + 20*c;
    logic [7:0] l_valid, l_ready;   // splitter lines
    word_t      l_data [8];
    logic [7:0] a_valid, a_ready;   // first 2d layer outputs
    word_t      a_data [8];
    logic [3:0] s_dup, s_drop;
    logic [3:0] a_dup, a_drop, a_err, b_dup, b_drop, b_err;

    for (genvar k = 0; k < 4; k++) begin : g_split
      word_t o_data [2];
      assign l_data[2*k]   = o_data[0];
      assign l_data[2*k+1] = o_data[1];
      splitter_2s #(.UNIT_ID(BASE + k), .BOARD_ID(BOARD_ID)) u_split (
        .clk, .rst_n, .cfg,
        .in_valid (in_valid[SRC[c][k]]), .in_ready(in_ready[SRC[c][k]]),
        .in_data  (in_data[SRC[c][k]]),
        .out_valid(l_valid[2*k+1 -: 2]), .out_ready(l_ready[2*k+1 -: 2]), .out_data(o_data),
        .dup(s_dup[k]), .drop(s_drop[k])
      );
    end

    for (genvar m = 0; m < 4; m++) begin : g_la
      word_t i_data [2];
      word_t o_data [2];
      logic [1:0] i_ready;
      assign i_data[0]     = l_data[m];
      assign i_data[1]     = l_data[m+4];
      assign l_ready[m]    = i_ready[0];
      assign l_ready[m+4]  = i_ready[1];
      assign a_data[2*m]   = o_data[0];
      assign a_data[2*m+1] = o_data[1];
      dispatcher_2d #(.UNIT_BASE(BASE + 4 + 2*m), .BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_2d (
        .clk, .rst_n, .cfg,
        .in_valid ({l_valid[m+4], l_valid[m]}), .in_ready(i_ready), .in_data(i_data),
        .out_valid(a_valid[2*m+1 -: 2]), .out_ready(a_ready[2*m+1 -: 2]), .out_data(o_data),
        .dup(a_dup[m]), .drop(a_drop[m]), .sync_err(a_err[m])
      );
    end

    for (genvar m = 0; m < 4; m++) begin : g_lb
      word_t i_data [2];
      word_t o_data [2];
      logic [1:0] i_ready;
      assign i_data[0]    = a_data[m];
      assign i_data[1]    = a_data[m+4];
      assign a_ready[m]   = i_ready[0];
      assign a_ready[m+4] = i_ready[1];
      assign out_data[8*c + 2*m]   = o_data[0];
      assign out_data[8*c + 2*m+1] = o_data[1];
      dispatcher_2d #(.UNIT_BASE(BASE + 12 + 2*m), .BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_2d (
        .clk, .rst_n, .cfg,
        .in_valid ({a_valid[m+4], a_valid[m]}), .in_ready(i_ready), .in_data(i_data),
        .out_valid(out_valid[8*c + 2*m+1 -: 2]), .out_ready(out_ready[8*c + 2*m+1 -: 2]),
        .out_data (o_data),
        .dup(b_dup[m]), .drop(b_drop[m]), .sync_err(b_err[m])
      );
    end

    assign c_dup[c]  = |{s_dup, a_dup, b_dup};
    assign c_drop[c] = |{s_drop, a_drop, b_drop};
    assign c_err[c]  = |{a_err, b_err};
  end

  assign dup      = |c_dup;
  assign drop     = |c_drop;
  assign sync_err = |c_err;

endmodule
