// dispatcher_2d: two-way dispatcher, two splitters crossed into two mergers.
//
// Input L (0) enters splitter UNIT_BASE and input R (1) splitter UNIT_BASE+1.
// Output k of both splitters feeds merger k, whose output is dispatcher output
// k. A hit on either input can thus reach output 0, output 1 or both,
// according to the LUT of its splitter. Latency is one cycle in the splitter
// plus at least one in the merger FIFO. The wiring is the paper's; unit
// numbering is this design's.
module dispatcher_2d
  import retina_pkg::*;
#(
  parameter int unsigned UNIT_BASE = 0,
  parameter int unsigned BOARD_ID  = 0,
  parameter int unsigned DEPTH     = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  cfg_t       cfg,
  input  logic [1:0] in_valid,
  output logic [1:0] in_ready,
  input  word_t      in_data  [2],
  output logic [1:0] out_valid,
  input  logic [1:0] out_ready,
  output word_t      out_data [2],
  output logic       dup,
  output logic       drop,
  output logic       sync_err
);
  // s_* indexed [splitter][output]
  logic [1:0] s_valid [2];
  logic [1:0] s_ready [2];
  word_t      s_data  [2][2];
  logic [1:0] s_dup, s_drop, m_err;

  for (genvar s = 0; s < 2; s++) begin : g_split
    splitter_2s #(.UNIT_ID(UNIT_BASE + s), .BOARD_ID(BOARD_ID)) u_split (
      .clk, .rst_n, .cfg,
      .in_valid (in_valid[s]), .in_ready(in_ready[s]), .in_data(in_data[s]),
      .out_valid(s_valid[s]), .out_ready(s_ready[s]), .out_data(s_data[s]),
      .dup(s_dup[s]), .drop(s_drop[s])
    );
  end

  for (genvar m = 0; m < 2; m++) begin : g_merge
    logic [1:0] m_ready;
    word_t      m_in [2];
    assign m_in[0]       = s_data[0][m];
    assign m_in[1]       = s_data[1][m];
    assign s_ready[0][m] = m_ready[0];
    assign s_ready[1][m] = m_ready[1];
    merger_2m #(.DEPTH(DEPTH)) u_merge (
      .clk, .rst_n,
      .in_valid ({s_valid[1][m], s_valid[0][m]}), .in_ready(m_ready), .in_data(m_in),
      .out_valid(out_valid[m]), .out_ready(out_ready[m]), .out_data(out_data[m]),
      .sync_err (m_err[m])
    );
  end

  assign dup      = |s_dup;
  assign drop     = |s_drop;
  assign sync_err = |m_err;

endmodule
