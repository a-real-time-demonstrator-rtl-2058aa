// retina_board: everything one FPGA board of the demonstrator holds.
//
// Sixteen host input lines (input_stage: input FIFO or event RAM) feed two
// identical switch segments: lines 0-7 segment 0, lines 8-15 segment 1, each
// segment taking half of the board's hits. In each segment a mid_switch
// spreads the hits over eight lateral output lines, line j towards board j
// (lat_tx[s][j]); the lateral inputs lat_rx[s][i], coming from board i, enter
// the segment's post_switch_8x16, which gives two lines per TPU. TPU t thus
// has four lines: segment 0 copy 0, segment 0 copy 1, segment 1 copy 0,
// segment 1 copy 1, all from Post-Switch output t. The eight TPUs are a column
// of the parameter space: TPU t covers cells u = 4t..4t+3 and
// v = 4*BOARD_ID..4*BOARD_ID+3. Their track streams are joined by a tree of
// seven mergers (so events stay separated) into a OUT_DEPTH-word output FIFO
// read by the host.
// Splitter numbering for routing LUT writes: unit = 64*segment + n, with
// n = 0..15 in the mid_switch and 16..55 in the post_switch.
// status gathers a sticky sync error (from any merger or TPU) and counters of
// events sent, TPU stalls, hit copies, hit discards and playback restarts.
// The two segments, the Mid/Post split and four-line TPUs follow the paper;
// the line-to-segment and TPU-to-cell assignments and the output tree are this
// design's choices.
module retina_board
  import retina_pkg::*;
#(
  parameter int unsigned BOARD_ID    = 0,
  parameter int unsigned DEPTH       = 16,
  parameter int unsigned IN_DEPTH    = 64,
  parameter int unsigned PB_DEPTH    = 1024,
  parameter int unsigned OUT_DEPTH   = 256,
  parameter int unsigned CU          = 4,
  parameter int unsigned CV          = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_t            cfg,
  input  logic [N_IN-1:0] host_in_valid,
  output logic [N_IN-1:0] host_in_ready,
  input  word_t           host_in_data [N_IN],
  output logic [7:0]      lat_tx_valid [N_SEG],
  input  logic [7:0]      lat_tx_ready [N_SEG],
  output word_t           lat_tx_data  [N_SEG][8],
  input  logic [7:0]      lat_rx_valid [N_SEG],
  output logic [7:0]      lat_rx_ready [N_SEG],
  input  word_t           lat_rx_data  [N_SEG][8],
  output logic            host_out_valid,
  input  logic            host_out_ready,
  output word_t           host_out_data,
  output board_status_t   status
);
  // input stages
  logic [N_IN-1:0] is_valid, is_ready, is_wrap;
  word_t           is_data [N_IN];

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    input_stage #(.LINE_ID(i), .BOARD_ID(BOARD_ID), .FIFO_DEPTH(IN_DEPTH), .PB_DEPTH(PB_DEPTH)) u_in (
      .clk, .rst_n, .cfg,
      .host_valid(host_in_valid[i]), .host_ready(host_in_ready[i]), .host_data(host_in_data[i]),
      .out_valid (is_valid[i]), .out_ready(is_ready[i]), .out_data(is_data[i]),
      .wrap      (is_wrap[i])
    );
  end

  // switch segments; post outputs p_*[s][8c+t]
  logic [15:0]      p_valid [N_SEG];
  logic [15:0]      p_ready [N_SEG];
  word_t            p_data  [N_SEG][16];
  logic [N_SEG-1:0] m_dup, m_drop, m_err, q_dup, q_drop, q_err;

  for (genvar s = 0; s < N_SEG; s++) begin : g_seg
    word_t i_data [8];
    for (genvar k = 0; k < 8; k++) begin : g_k
      assign i_data[k] = is_data[8*s + k];
    end
    mid_switch #(.UNIT_BASE(SEG_UNITS*s), .BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_mid (
      .clk, .rst_n, .cfg,
      .in_valid (is_valid[8*s+7 -: 8]), .in_ready(is_ready[8*s+7 -: 8]), .in_data(i_data),
      .out_valid(lat_tx_valid[s]), .out_ready(lat_tx_ready[s]), .out_data(lat_tx_data[s]),
      .dup(m_dup[s]), .drop(m_drop[s]), .sync_err(m_err[s])
    );
    post_switch_8x16 #(.UNIT_BASE(SEG_UNITS*s + 16), .BOARD_ID(BOARD_ID), .DEPTH(DEPTH)) u_post (
      .clk, .rst_n, .cfg,
      .in_valid (lat_rx_valid[s]), .in_ready(lat_rx_ready[s]), .in_data(lat_rx_data[s]),
      .out_valid(p_valid[s]), .out_ready(p_ready[s]), .out_data(p_data[s]),
      .dup(q_dup[s]), .drop(q_drop[s]), .sync_err(q_err[s])
    );
  end

  // TPUs
  logic [N_TPU-1:0] t_valid, t_ready, t_stall, t_err;
  word_t            t_data [N_TPU];

  for (genvar t = 0; t < N_TPU; t++) begin : g_tpu
    logic [3:0] l_valid, l_ready;
    word_t      l_data [4];
    for (genvar s = 0; s < N_SEG; s++) begin : g_s
      for (genvar cp = 0; cp < 2; cp++) begin : g_c
        assign l_valid[2*s + cp]    = p_valid[s][8*cp + t];
        assign l_data[2*s + cp]     = p_data[s][8*cp + t];
        assign p_ready[s][8*cp + t] = l_ready[2*s + cp];
      end
    end
    tpu #(.TPU_ID(t), .BOARD_ID(BOARD_ID), .CU(CU), .CV(CV),
          .U0(CU*t), .V0(CV*BOARD_ID), .N_LINES(TPU_LINES)) u_tpu (
      .clk, .rst_n, .cfg,
      .in_valid (l_valid), .in_ready(l_ready), .in_data(l_data),
      .out_valid(t_valid[t]), .out_ready(t_ready[t]), .out_data(t_data[t]),
      .stall    (t_stall[t]), .sync_err(t_err[t])
    );
  end

  // output merger tree: nodes 0..3 take TPU pairs, 4..5 take node pairs, 6 is the root
  logic [6:0] n_valid, n_ready, n_err;
  word_t      n_data [7];

  for (genvar n = 0; n < 7; n++) begin : g_tree
    logic [1:0] i_valid, i_ready;
    word_t      i_data [2];
    if (n < 4) begin : g_leaf
      assign i_valid          = t_valid[2*n+1 -: 2];
      assign i_data[0]        = t_data[2*n];
      assign i_data[1]        = t_data[2*n+1];
      assign t_ready[2*n+1 -: 2] = i_ready;
    end else begin : g_node
      localparam int unsigned A = (n - 4) * 2;   // children A, A+1 (n=6: 4, 5)
      localparam int unsigned C = (n == 6) ? 4 : A;
      assign i_valid          = n_valid[C+1 -: 2];
      assign i_data[0]        = n_data[C];
      assign i_data[1]        = n_data[C+1];
      assign n_ready[C+1 -: 2] = i_ready;
    end
    merger_2m #(.DEPTH(DEPTH)) u_merge (
      .clk, .rst_n,
      .in_valid (i_valid), .in_ready(i_ready), .in_data(i_data),
      .out_valid(n_valid[n]), .out_ready(n_ready[n]), .out_data(n_data[n]),
      .sync_err (n_err[n])
    );
  end

  logic [$clog2(OUT_DEPTH+1)-1:0] unused_count;
  sync_fifo #(.WIDTH($bits(word_t)), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n,
    .in_valid (n_valid[6]), .in_ready(n_ready[6]), .in_data(n_data[6]),
    .out_valid(host_out_valid), .out_ready(host_out_ready), .out_data(host_out_data),
    .count    (unused_count)
  );

  // status
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status <= '0;
    end else begin
      if (|{m_err, q_err, t_err, n_err}) status.sync_err <= 1'b1;
      if (host_out_valid && host_out_ready && host_out_data.eoe)
        status.events_out <= status.events_out + 1'b1;
      if (|t_stall)           status.tpu_stalls  <= status.tpu_stalls + 1'b1;
      if (|{m_dup, q_dup})    status.dup_cycles  <= status.dup_cycles + 1'b1;
      if (|{m_drop, q_drop})  status.drop_cycles <= status.drop_cycles + 1'b1;
      if (|is_wrap)           status.wraps       <= status.wraps + 1'b1;
    end
  end

endmodule
