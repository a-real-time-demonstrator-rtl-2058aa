// retina_pkg: types and constants shared by the whole track processor.
//
// Every line of the distribution network carries word_t: a 32-bit payload and
// an end-of-event flag. A hit payload is hit_t (detector layer and global x,y);
// a track payload is track_t (TPU number and centroid u,v). An end-of-event
// word carries the 32-bit event id in its payload so that mergers and TPUs can
// check that the streams they join are aligned on the same event.
// The configuration bus cfg_t is one write per cycle from the host, addressed
// by board, kind, unit and address. Field widths are this design's own choice;
// the topology constants (8 boards, 2 switch segments of 8 lines, 8 TPUs per
// board with 4 input lines) follow the demonstrator.
package retina_pkg;

  localparam int unsigned N_BOARDS    = 8;   // FPGA boards
  localparam int unsigned N_SEG       = 2;   // switch segments per board
  localparam int unsigned SEG_LINES   = 8;   // input lines per segment
  localparam int unsigned N_IN        = N_SEG * SEG_LINES;  // host lines per board
  localparam int unsigned N_TPU       = 8;   // TPUs per board
  localparam int unsigned TPU_LINES   = 4;   // input lines per TPU
  localparam int unsigned SEG_UNITS   = 64;  // splitter id space per segment

  localparam int unsigned DATA_W   = 32;
  localparam int unsigned LAYER_W  = 4;
  localparam int unsigned N_LAYERS = 16;
  localparam int unsigned COORD_W  = 14;
  localparam int unsigned TRK_W    = 13;

  typedef struct packed {
    logic              eoe;   // 1: end-of-event separator, data = event id
    logic [DATA_W-1:0] data;
  } word_t;

  typedef struct packed {
    logic [LAYER_W-1:0]        layer;
    logic signed [COORD_W-1:0] x;
    logic signed [COORD_W-1:0] y;
  } hit_t;

  typedef struct packed {
    logic [5:0]       tpu;   // global TPU number, board*8 + tpu
    logic [TRK_W-1:0] u;     // (cell column + 1 + offset) * 2^FRAC
    logic [TRK_W-1:0] v;
  } track_t;

  typedef enum logic [1:0] {
    CFG_ROUTE    = 2'd0,  // splitter LUT: unit = seg*64+splitter, addr = LUT index
    CFG_RECEPTOR = 2'd1,  // unit = TPU, addr = {cell, layer}, data = {x, y}
    CFG_TPU_REG  = 2'd2,  // unit = TPU, addr 0 search distance, 1 sigma shift, 2 threshold
    CFG_INPUT    = 2'd3   // unit = input line, addr < 2048: RAM word; 2048 mode; 2049 length
  } cfg_kind_e;

  typedef struct packed {
    logic        we;
    logic [2:0]  board;
    cfg_kind_e   kind;
    logic [7:0]  unit;
    logic [11:0] addr;
    logic [32:0] data;
  } cfg_t;

  typedef struct packed {
    logic        sync_err;    // sticky: some merger or TPU saw mismatching event ids
    logic [15:0] events_out;  // end-of-event words sent to the host
    logic [15:0] tpu_stalls;  // cycles some TPU waited for its previous readout
    logic [15:0] dup_cycles;  // cycles some splitter copied a hit to both outputs
    logic [15:0] drop_cycles; // cycles some splitter discarded a hit
    logic [15:0] wraps;       // playback RAM restarts
  } board_status_t;

  // Routing LUT index: layer and the three top bits of each coordinate.
  localparam int unsigned ROUTE_XB = 3;
  localparam int unsigned ROUTE_YB = 3;
  localparam int unsigned ROUTE_AW = LAYER_W + ROUTE_XB + ROUTE_YB;

  function automatic logic [ROUTE_AW-1:0] route_index(input hit_t h);
    return {h.layer, h.x[COORD_W-1 -: ROUTE_XB], h.y[COORD_W-1 -: ROUTE_YB]};
  endfunction

endpackage
