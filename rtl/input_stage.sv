// input_stage: one input line of a board, fed live by the host or replayed
// from an on-chip event RAM.
//
// Live mode (mode = 0): words written by the host through host_* are queued in
// a FIFO_DEPTH-word input FIFO and passed on to the switch. Playback mode
// (mode = 1): the first `len` words of a PB_DEPTH-word RAM are sent over and
// over, giving a continuous stream of the same events; `wrap` pulses each time
// the read pointer goes back to word 0. The host fills the RAM and sets mode
// and len through cfg (kind CFG_INPUT, unit = LINE_ID): addresses below 2048
// write RAM word addr with cfg.data (33 bits, bit 32 = end-of-event flag),
// address 2048 writes mode (data[0]) and 2049 writes len. Writing mode restarts
// playback from word 0. In playback the host FIFO still accepts words but they
// wait until live mode returns. One word per cycle; the RAM is read
// asynchronously (first-word fall-through), as for the FIFO.
// The two sources follow the paper; the RAM size, the registers and the
// one-RAM-per-line arrangement are this design's choices.
module input_stage
  import retina_pkg::*;
#(
  parameter int unsigned LINE_ID    = 0,
  parameter int unsigned BOARD_ID   = 0,
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned PB_DEPTH   = 1024
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cfg_t  cfg,
  input  logic  host_valid,
  output logic  host_ready,
  input  word_t host_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data,
  output logic  wrap
);
  localparam int unsigned PAW = $clog2(PB_DEPTH);

  logic         mode;
  logic [PAW:0] len;
  logic [PAW-1:0] ptr;
  word_t        ram [PB_DEPTH];
  logic         f_valid, f_ready;
  word_t        f_data;
  logic         cfg_hit;
  logic [$clog2(FIFO_DEPTH+1)-1:0] unused_count;

  sync_fifo #(.WIDTH($bits(word_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid (host_valid), .in_ready(host_ready), .in_data(host_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .count    (unused_count)
  );

  assign cfg_hit = cfg.we && cfg.kind == CFG_INPUT && cfg.board == 3'(BOARD_ID)
                   && cfg.unit == 8'(LINE_ID);

  always_ff @(posedge clk) begin
    if (cfg_hit && !cfg.addr[11]) ram[cfg.addr[PAW-1:0]] <= word_t'(cfg.data);
  end

  assign out_valid = mode ? (len != '0) : f_valid;
  assign out_data  = mode ? ram[ptr] : f_data;
  assign f_ready   = !mode && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= 1'b0;
      len  <= '0;
      ptr  <= '0;
      wrap <= 1'b0;
    end else begin
      wrap <= 1'b0;
      if (cfg_hit && cfg.addr == 12'h800) begin
        mode <= cfg.data[0];
        ptr  <= '0;
      end else if (cfg_hit && cfg.addr == 12'h801) begin
        len <= cfg.data[PAW:0];
      end else if (mode && out_valid && out_ready) begin
        if ({1'b0, ptr} == len - 1'b1) begin
          ptr  <= '0;
          wrap <= 1'b1;
        end else begin
          ptr <= ptr + 1'b1;
        end
      end
    end
  end

endmodule
