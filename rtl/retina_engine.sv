// retina_engine: one cell of the retina, with its receptors and accumulator.
//
// The cell stands for one reference track. For every detector layer it holds
// a receptor, the point where that track crosses the layer, in a 16-entry LUT
// written by the host (cfg kind CFG_RECEPTOR, unit = TPU, addr = {cell,
// layer}, data = {x, y}). Up to N_LINES hits arrive per cycle. For each hit
// the engine takes the receptor of the hit's layer and the distance
// d^2 = dx^2 + dy^2. Hits with |dx| or |dy| above the search distance sd, or
// d^2 above sd^2, weigh nothing. Otherwise the weight is
//   w = WMAX >> floor(d^2 / 2^sig_sh)   (zero once the shift reaches W_W),
// a Gaussian in d written in base 2 and sampled in steps of 2^sig_sh in d^2.
// The weights of a cycle are added to a saturating accumulator, the
// "excitation level" of the cell, in the same cycle. clear restarts the
// accumulator at the weights of the current cycle (the TPU asserts it only in
// a cycle without hits).
// Receptors, accumulation, the Gaussian-like weight and the search distance
// follow the paper; the base-2 form of the Gaussian, the widths and the
// saturation are this design's choices.
// The weight function takes the whole hit word but reads only x and y; the
// layer field selects the receptor outside it, so lint lists it as unused there.
module retina_engine
  import retina_pkg::*;
#(
  parameter int unsigned CELL_ID  = 0,
  parameter int unsigned TPU_ID   = 0,
  parameter int unsigned BOARD_ID = 0,
  parameter int unsigned N_LINES  = 4,
  parameter int unsigned W_W      = 8,
  parameter int unsigned ACC_W    = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  logic [N_LINES-1:0] hit_valid,
  input  hit_t               hit [N_LINES],
  input  logic [COORD_W-1:0] sd,
  input  logic [3:0]         sig_sh,
  input  logic               clear,
  output logic [ACC_W-1:0]   acc
);
  localparam logic [W_W-1:0] WMAX = W_W'(1) << (W_W - 1);
  localparam int unsigned SUM_W = ACC_W + 1 + $clog2(N_LINES);

  logic signed [COORD_W-1:0] rx [N_LAYERS];
  logic signed [COORD_W-1:0] ry [N_LAYERS];
  logic [W_W-1:0]            w  [N_LINES];
  logic [SUM_W-1:0]          sum;
  logic [SUM_W-1:0]          nxt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++) begin
        rx[l] <= '0;
        ry[l] <= '0;
      end
    end else if (cfg.we && cfg.kind == CFG_RECEPTOR && cfg.board == 3'(BOARD_ID)
                 && cfg.unit == 8'(TPU_ID) && cfg.addr[7:4] == 4'(CELL_ID)) begin
      rx[cfg.addr[3:0]] <= cfg.data[2*COORD_W-1:COORD_W];
      ry[cfg.addr[3:0]] <= cfg.data[COORD_W-1:0];
    end
  end

  function automatic logic [W_W-1:0] weight(input hit_t h,
                                            input logic signed [COORD_W-1:0] x0,
                                            input logic signed [COORD_W-1:0] y0,
                                            input logic [COORD_W-1:0] dmax,
                                            input logic [3:0] sh);
    logic signed [COORD_W:0] dx, dy;
    logic [COORD_W:0]        ax, ay;
    logic [2*COORD_W+2:0]    d2, dmax2, q;
    dx    = (COORD_W+1)'(h.x) - (COORD_W+1)'(x0);
    dy    = (COORD_W+1)'(h.y) - (COORD_W+1)'(y0);
    ax    = dx[COORD_W] ? -dx : dx;
    ay    = dy[COORD_W] ? -dy : dy;
    d2    = (2*COORD_W+3)'(ax) * (2*COORD_W+3)'(ax) + (2*COORD_W+3)'(ay) * (2*COORD_W+3)'(ay);
    dmax2 = (2*COORD_W+3)'(dmax) * (2*COORD_W+3)'(dmax);
    q     = d2 >> sh;
    if (ax > (COORD_W+1)'(dmax) || ay > (COORD_W+1)'(dmax) || d2 > dmax2) return '0;
    if (q >= (2*COORD_W+3)'(W_W)) return '0;
    return WMAX >> q[$clog2(W_W)-1:0];
  endfunction

  always_comb begin
    sum = '0;
    for (int k = 0; k < N_LINES; k++) begin
      w[k] = hit_valid[k] ? weight(hit[k], rx[hit[k].layer], ry[hit[k].layer], sd, sig_sh) : '0;
      sum  = sum + SUM_W'(w[k]);
    end
    nxt = (clear ? '0 : SUM_W'(acc)) + sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else        acc <= (nxt > SUM_W'({ACC_W{1'b1}})) ? {ACC_W{1'b1}} : nxt[ACC_W-1:0];
  end

endmodule
