// dispatcher_4d: four-way dispatcher made of four dispatcher_2d in two layers.
//
// Upper layer: 2d A takes inputs 0,1 and 2d B takes inputs 2,3. Lower layer:
// 2d C takes A.0 (L) and B.0 (R), 2d D takes A.1 (L) and B.1 (R). Outputs are
// C.0, C.1, D.0, D.1. Every input can reach every output, and a hit is copied
// only where its splitter LUTs say so. Latency is two 2d stages. The wiring is
// the paper's; splitter numbering (UNIT_BASE + 2*k for 2d k in the order A, B,
// C, D) is this design's.
module dispatcher_4d
  import retina_pkg::*;
#(
  parameter int unsigned UNIT_BASE = 0,
  parameter int unsigned BOARD_ID  = 0,
  parameter int unsigned DEPTH     = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  cfg_t       cfg,
  input  logic [3:0] in_valid,
  output logic [3:0] in_ready,
  input  word_t      in_data  [4],
  output logic [3:0] out_valid,
  input  logic [3:0] out_ready,
  output word_t      out_data [4],
  output logic       dup,
  output logic       drop,
  output logic       sync_err
);
  // upper layer outputs: u_*[2*d + k] = output k of upper 2d d (A=0, B=1)
  logic [3:0] u_valid, u_ready;
  word_t      u_data [4];
  // lower layer inputs: l_*[2*d + side] = side (0=L, 1=R) of lower 2d d (C=0, D=1)
  logic [3:0] l_valid, l_ready;
  word_t      l_data [4];
  logic [3:0] d_dup, d_drop, d_err;

  for (genvar d = 0; d < 2; d++) begin : g_upper
    word_t i_data [2];
    word_t o_data [2];
    assign i_data[0] = in_data[2*d];
    assign i_data[1] = in_data[2*d+1];
    assign u_data[2*d]   = o_data[0];
    assign u_data[2*d+1] = o_data[1];
    dispatcher_2d #(.UNIT_BASE(UNIT_BASE + 2*d), .BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_2d (
      .clk, .rst_n, .cfg,
      .in_valid (in_valid[2*d+1 -: 2]), .in_ready(in_ready[2*d+1 -: 2]), .in_data(i_data),
      .out_valid(u_valid[2*d+1 -: 2]), .out_ready(u_ready[2*d+1 -: 2]), .out_data(o_data),
      .dup(d_dup[d]), .drop(d_drop[d]), .sync_err(d_err[d])
    );
  end

  // crossing: A.k -> lower k side L, B.k -> lower k side R
  for (genvar d = 0; d < 2; d++) begin : g_cross
    for (genvar k = 0; k < 2; k++) begin : g_k
      assign l_valid[2*k + d]  = u_valid[2*d + k];
      assign l_data[2*k + d]   = u_data[2*d + k];
      assign u_ready[2*d + k]  = l_ready[2*k + d];
    end
  end

  for (genvar d = 0; d < 2; d++) begin : g_lower
    word_t i_data [2];
    word_t o_data [2];
    assign i_data[0] = l_data[2*d];
    assign i_data[1] = l_data[2*d+1];
    assign out_data[2*d]   = o_data[0];
    assign out_data[2*d+1] = o_data[1];
    dispatcher_2d #(.UNIT_BASE(UNIT_BASE + 4 + 2*d), .BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_2d (
      .clk, .rst_n, .cfg,
      .in_valid (l_valid[2*d+1 -: 2]), .in_ready(l_ready[2*d+1 -: 2]), .in_data(i_data),
      .out_valid(out_valid[2*d+1 -: 2]), .out_ready(out_ready[2*d+1 -: 2]), .out_data(o_data),
      .dup(d_dup[2+d]), .drop(d_drop[2+d]), .sync_err(d_err[2+d])
    );
  end

  assign dup      = |d_dup;
  assign drop     = |d_drop;
  assign sync_err = |d_err;

endmodule
