// tb_retina_board: self-checking testbench for one retina_board (board 0).
//
// The board's lateral outputs are looped back to its own lateral inputs
// (segment s output j into segment s input j), so the board stands alone.
// The Mid-Switch routing LUTs are written so that every hit leaves through
// Mid-Switch output 0 (first half) or 4 (second half) only, and layer-15 hits
// are discarded at the first splitter; hence each TPU receives every other
// hit exactly once, through Post-Switch copy 0 or copy 1. The Post-Switch
// keeps broadcast routing. Receptors and tuning registers of the eight TPUs
// use the test geometry of retina_model_pkg.
// 30 events with straight tracks in the board's band of the parameter space
// (v from 0 to 4 cells) plus random hits are sent, each hit on one random
// input line. The board output between end-of-event words is compared, as a
// sorted list, with the reference tracks of its eight TPUs. Output
// back-pressure is random with one long pause. Copies (in the Post-Switch),
// discards and TPU stalls must all occur. A watchdog bounds the run.
module tb_retina_board;
  import retina_pkg::*;
  import retina_model_pkg::*;

  localparam int SD = 48, SH = 8, THR = 600;
  localparam int N_EV = 30;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t            cfg;
  logic [N_IN-1:0] host_in_valid, host_in_ready;
  word_t           host_in_data [N_IN];
  logic [7:0]      lat_tx_valid [N_SEG];
  logic [7:0]      lat_tx_ready [N_SEG];
  word_t           lat_tx_data  [N_SEG][8];
  logic [7:0]      lat_rx_valid [N_SEG];
  logic [7:0]      lat_rx_ready [N_SEG];
  word_t           lat_rx_data  [N_SEG][8];
  logic            host_out_valid, host_out_ready;
  word_t           host_out_data;
  board_status_t   status;

  retina_board #(.BOARD_ID(0)) dut (.*);

  assign lat_rx_valid = lat_tx_valid;
  assign lat_rx_data  = lat_tx_data;
  assign lat_tx_ready = lat_rx_ready;

  int checks = 0;
  int failures = 0;
  word_t stream [N_IN][$];
  int    idx [N_IN];
  word_t exp_ev [$][$];
  word_t got [$];
  int    n_ev_out = 0;
  bit    pause = 0;

  task automatic cfg_put(cfg_kind_e kind, int unit, int addr, logic [32:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, board: 3'd0, kind: kind, unit: 8'(unit), addr: 12'(addr), data: data};
  endtask

  always @(posedge clk) if (rst_n && !cfg.we) begin
    for (int i = 0; i < N_IN; i++) begin
      if (host_in_valid[i] && host_in_ready[i]) idx[i]++;
      if (host_in_valid[i] && !host_in_ready[i]) begin
      end else if (idx[i] < stream[i].size() && $urandom_range(0, 9) < 8) begin
        host_in_valid[i] <= 1'b1;
        host_in_data[i]  <= stream[i][idx[i]];
      end else begin
        host_in_valid[i] <= 1'b0;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (host_out_valid && host_out_ready) begin
      if (!host_out_data.eoe) got.push_back(host_out_data);
      else begin
        got.sort();
        checks++;
        if (n_ev_out >= N_EV || got != exp_ev[n_ev_out] || host_out_data.data != 32'(200 + n_ev_out)) begin
          failures++;
          $display("FAIL event %0d (id %0d): %0d tracks", n_ev_out, host_out_data.data, got.size());
        end
        got.delete();
        n_ev_out++;
      end
    end
    host_out_ready <= !pause && ($urandom_range(0, 9) < 7);
  end

  initial begin
    automatic int n_tracks = 0;
    cfg = '0;
    host_out_ready = 1'b0;
    for (int i = 0; i < N_IN; i++) begin
      host_in_valid[i] = 1'b0;
      host_in_data[i] = '0;
      idx[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < N_TPU; t++) begin
      cfg_put(CFG_TPU_REG, t, 0, 33'(SD));
      cfg_put(CFG_TPU_REG, t, 1, 33'(SH));
      cfg_put(CFG_TPU_REG, t, 2, 33'(THR));
      for (int c = 0; c < 16; c++)
        for (int l = 0; l < 16; l++)
          cfg_put(CFG_RECEPTOR, t, c * 16 + l,
                  33'({14'(rec(4 * t + c % 4, l)), 14'(rec(c / 4, l))}));
    end
    // Mid-Switch: upper 2d splitters (units 0-3, 8-11) and splitters of lower 2d C (4-5, 12-13)
    for (int s = 0; s < N_SEG; s++)
      for (int u = 0; u < 16; u++)
        if (u % 8 < 6)
          for (int l = 0; l < 16; l++)
            for (int xb = 0; xb < 2; xb++)
              for (int yb = 0; yb < 2; yb++)
                cfg_put(CFG_ROUTE, 64 * s + u, int'({4'(l), 3'(xb), 3'(yb)}),
                        (l == 15 && u % 8 < 4) ? 33'd0 : 33'd1);
    @(negedge clk);
    cfg.we = 1'b0;
    for (int e = 0; e < N_EV; e++) begin
      automatic hit_t  hits [$];
      automatic hit_t  kept [$];
      automatic word_t tr [$];
      repeat ((e % 5 == 4) ? 0 : $urandom_range(1, 3)) begin
        automatic real u = 0.3 + 31.4 * $urandom_range(0, 1000) / 1000.0;
        automatic real v = 0.3 + 3.4 * $urandom_range(0, 1000) / 1000.0;
        for (int l = 0; l < 16; l++) hits.push_back(track_hit(u, v, l, 3));
      end
      repeat ($urandom_range(0, 6)) begin
        automatic hit_t h;
        h.layer = 4'($urandom_range(0, 15));
        h.x = 14'($urandom_range(0, 3200));
        h.y = 14'($urandom_range(0, 400));
        hits.push_back(h);
      end
      hits.shuffle();
      foreach (hits[i]) begin
        stream[$urandom_range(0, N_IN - 1)].push_back('{eoe: 1'b0, data: hits[i]});
        if (hits[i].layer != 4'd15) kept.push_back(hits[i]);
      end
      for (int i = 0; i < N_IN; i++) stream[i].push_back('{eoe: 1'b1, data: 32'(200 + e)});
      for (int t = 0; t < N_TPU; t++) begin
        automatic int acc [16];
        tpu_levels(kept, 4 * t, 0, SD, SH, acc);
        tpu_tracks(acc, THR, 4 * t, 0, t, tr);
      end
      tr.sort();
      n_tracks += tr.size();
      exp_ev.push_back(tr);
    end
    while (n_ev_out < N_EV / 2) @(posedge clk);
    pause = 1;
    repeat (300) @(posedge clk);
    pause = 0;
    while (n_ev_out < N_EV) @(posedge clk);
    repeat (50) @(posedge clk);
    checks += 5;
    if (n_ev_out != N_EV) begin failures++; $display("FAIL %0d events out", n_ev_out); end
    if (status.dup_cycles == 0)  begin failures++; $display("FAIL no copies"); end
    if (status.drop_cycles == 0) begin failures++; $display("FAIL no discards"); end
    if (status.tpu_stalls == 0)  begin failures++; $display("FAIL no TPU stalls"); end
    if (status.sync_err || status.events_out != 16'(N_EV)) begin
      failures++;
      $display("FAIL status: sync_err %b events %0d", status.sync_err, status.events_out);
    end
    $display("tracks %0d, copies %0d, discards %0d, stalls %0d", n_tracks, status.dup_cycles,
             status.drop_cycles, status.tpu_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog, events out %0d", n_ev_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
