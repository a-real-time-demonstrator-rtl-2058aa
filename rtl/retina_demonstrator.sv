// retina_demonstrator: eight boards joined by a full mesh, one quadrant of the
// track parameter space.
//
// Each retina_board takes 16 host input lines and returns one stream of
// tracks. The lateral mesh joins, for each switch segment s, output j of
// board b's Mid-Switch to input b of board j's Post-Switch, so that every
// board's hits can reach the TPUs of every board; there are 2 x 8 x 8 lateral
// lines. In hardware each is an optical transceiver link through a patch
// panel; here they are direct valid/ready connections with no latency.
// The 64 TPUs of 4x4 cells tile a 32 x 32 cell grid: board b holds row
// v = 4b..4b+3, TPU t columns u = 4t..4t+3.
// Ports: one configuration bus cfg shared by all boards (cfg.board selects
// one), host input lines host_in_*[board][line], track outputs
// host_out_*[board] and status[board].
// The board count, the mesh and the 64 TPUs follow the paper; the ideal links
// and the tiling of the parameter space are this design's choices.
module retina_demonstrator
  import retina_pkg::*;
#(
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned IN_DEPTH  = 64,
  parameter int unsigned PB_DEPTH  = 1024,
  parameter int unsigned OUT_DEPTH = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_t            cfg,
  input  logic [N_IN-1:0] host_in_valid  [N_BOARDS],
  output logic [N_IN-1:0] host_in_ready  [N_BOARDS],
  input  word_t           host_in_data   [N_BOARDS][N_IN],
  output logic            host_out_valid [N_BOARDS],
  input  logic            host_out_ready [N_BOARDS],
  output word_t           host_out_data  [N_BOARDS],
  output board_status_t   status         [N_BOARDS]
);
  // lateral lines, indexed [board][segment]
  logic [7:0] tx_valid [N_BOARDS][N_SEG];
  logic [7:0] tx_ready [N_BOARDS][N_SEG];
  word_t      tx_data  [N_BOARDS][N_SEG][8];
  logic [7:0] rx_valid [N_BOARDS][N_SEG];
  logic [7:0] rx_ready [N_BOARDS][N_SEG];
  word_t      rx_data  [N_BOARDS][N_SEG][8];

  for (genvar b = 0; b < N_BOARDS; b++) begin : g_board
    retina_board #(.BOARD_ID(b), .DEPTH(DEPTH), .IN_DEPTH(IN_DEPTH),
                   .PB_DEPTH(PB_DEPTH), .OUT_DEPTH(OUT_DEPTH)) u_board (
      .clk, .rst_n, .cfg,
      .host_in_valid (host_in_valid[b]), .host_in_ready(host_in_ready[b]),
      .host_in_data  (host_in_data[b]),
      .lat_tx_valid  (tx_valid[b]), .lat_tx_ready(tx_ready[b]), .lat_tx_data(tx_data[b]),
      .lat_rx_valid  (rx_valid[b]), .lat_rx_ready(rx_ready[b]), .lat_rx_data(rx_data[b]),
      .host_out_valid(host_out_valid[b]), .host_out_ready(host_out_ready[b]),
      .host_out_data (host_out_data[b]),
      .status        (status[b])
    );
  end

  // full mesh: board b, segment s, output j  ->  board j, segment s, input b
  for (genvar b = 0; b < N_BOARDS; b++) begin : g_mesh_b
    for (genvar s = 0; s < N_SEG; s++) begin : g_mesh_s
      for (genvar j = 0; j < N_BOARDS; j++) begin : g_mesh_j
        assign rx_valid[j][s][b] = tx_valid[b][s][j];
        assign rx_data[j][s][b]  = tx_data[b][s][j];
        assign tx_ready[b][s][j] = rx_ready[j][s][b];
      end
    end
  end

endmodule
