// merger_2m: two-way merger of the hit distribution network.
//
// Two input lines, one output line. Each input is buffered in a DEPTH-word
// FIFO. Hits at the heads of the FIFOs are forwarded one per cycle, taking
// turns when both inputs have a hit. An end-of-event word at one head blocks
// that input until the other input reaches its end-of-event word too; then a
// single end-of-event word is sent and both are consumed. Thus every event
// leaves the merger as one contiguous block, which is what keeps events
// separated through the whole network. If the two end-of-event words carry
// different event ids, sync_err pulses (registered, one cycle later) and the
// id of input 0 is forwarded.
// Interface: in_* are valid/ready, out_* is valid/ready with out_data driven
// from the FIFO heads (no extra latency after the FIFO).
// The merging function follows the paper; buffering, arbitration and the id
// check are this design's choices.
module merger_2m
  import retina_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [1:0] in_valid,
  output logic [1:0] in_ready,
  input  word_t      in_data [2],
  output logic       out_valid,
  input  logic       out_ready,
  output word_t      out_data,
  output logic       sync_err
);
  logic [1:0] hv;
  logic [1:0] pop;
  word_t      hd [2];
  logic [1:0] is_hit;
  logic       both_eoe;
  logic       prio;
  logic       sel;
  logic       fire;

  for (genvar k = 0; k < 2; k++) begin : g_fifo
    logic [$clog2(DEPTH+1)-1:0] unused_count;
    sync_fifo #(.WIDTH($bits(word_t)), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (in_valid[k]), .in_ready(in_ready[k]), .in_data(in_data[k]),
      .out_valid(hv[k]), .out_ready(pop[k]), .out_data(hd[k]),
      .count    (unused_count)
    );
    assign is_hit[k] = hv[k] && !hd[k].eoe;
  end

  assign both_eoe = hv[0] && hv[1] && hd[0].eoe && hd[1].eoe;

  always_comb begin
    if (is_hit[0] && is_hit[1]) sel = prio;
    else                         sel = is_hit[1];
  end

  assign out_valid = (|is_hit) || both_eoe;
  assign out_data  = (|is_hit) ? hd[sel] : hd[0];
  assign fire      = out_valid && out_ready;

  always_comb begin
    pop = 2'b00;
    if (fire) begin
      if (|is_hit) pop[sel] = 1'b1;
      else         pop      = 2'b11;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio     <= 1'b0;
      sync_err <= 1'b0;
    end else begin
      if (fire && is_hit[0] && is_hit[1]) prio <= ~sel;
      sync_err <= fire && !(|is_hit) && (hd[0].data != hd[1].data);
    end
  end

endmodule
