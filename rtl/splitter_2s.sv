// splitter_2s: two-way splitter of the hit distribution network.
//
// One input line, two output lines. Each hit looks up a 2-bit mask in a routing
// LUT indexed by route_index(hit) (layer and the top bits of x and y): bit k
// set sends the hit to output k, both bits set copy it, no bit set discards
// it. End-of-event words always go to both outputs, so every merger below sees
// each event boundary. The LUT resets to "both", the unoptimised switch that
// sends every hit everywhere; the host reprograms it through cfg
// (kind CFG_ROUTE, matching board and unit).
// Each output has its own register; a word is accepted only when every output
// it is routed to is empty or being emptied in the same cycle, so the splitter
// adds one cycle of latency and runs at one word per cycle.
// The splitter and its LUT follow the paper; the LUT index, the discard code
// and the output registers are this design's choices.
// The assertion below is disabled during reset with disable iff (!rst_n); lint
// tools report this as rst_n also being read synchronously, which the logic
// itself does not do.
module splitter_2s
  import retina_pkg::*;
#(
  parameter int unsigned UNIT_ID  = 0,
  parameter int unsigned BOARD_ID = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data,
  output logic [1:0]  out_valid,
  input  logic [1:0]  out_ready,
  output word_t       out_data [2],
  output logic        dup,
  output logic        drop
);
  localparam int unsigned LUT_N = 2 ** ROUTE_AW;

  logic [1:0] lut [LUT_N];
  logic [1:0] route;
  logic [1:0] can_take;
  logic       accept;

  assign route = in_data.eoe ? 2'b11 : lut[route_index(hit_t'(in_data.data))];

  for (genvar k = 0; k < 2; k++) begin : g_can
    assign can_take[k] = !out_valid[k] || out_ready[k];
  end

  assign in_ready = (!route[0] || can_take[0]) && (!route[1] || can_take[1]);
  assign accept   = in_valid && in_ready;
  assign dup      = accept && !in_data.eoe && (route == 2'b11);
  assign drop     = accept && (route == 2'b00);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LUT_N; i++) lut[i] <= 2'b11;
    end else if (cfg.we && cfg.kind == CFG_ROUTE && cfg.board == 3'(BOARD_ID)
                 && cfg.unit == 8'(UNIT_ID)) begin
      lut[cfg.addr[ROUTE_AW-1:0]] <= cfg.data[1:0];
    end
  end

  for (genvar k = 0; k < 2; k++) begin : g_out
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[k] <= 1'b0;
        out_data[k]  <= '0;
      end else begin
        if (out_valid[k] && out_ready[k]) out_valid[k] <= 1'b0;
        if (accept && route[k]) begin
          out_valid[k] <= 1'b1;
          out_data[k]  <= in_data;
        end
      end
    end

    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[k] && !out_ready[k] |=> out_valid[k] && $stable(out_data[k]));
  end

endmodule
