// tb_retina_demonstrator: end-to-end test of the eight-board demonstrator at
// its default sizes (64 TPUs of 4x4 cells, full switch).
//
// Setup: every TPU gets its tuning registers and the receptors of the test
// geometry. The first-layer splitters of every Mid-Switch are told to discard
// layer-15 hits; all other routing LUTs keep their reset value "both".
// Live phase: N_EV events, each with a few straight tracks anywhere in the
// 32x32 cell grid plus random hits. Layers 2b and 2b+1 are read out by board
// b. Each hit goes to one segment, chosen at random, and there on one line of
// each Mid-Switch half: half 0 reaches boards 0-3 and half 1 boards 4-7, so
// with broadcast routing each TPU receives each hit exactly once. Every line
// ends every event with an end-of-event word.
// Expected output: the reference model gives, per board and event, the
// tracks of its eight TPUs from all hits except layer 15. The board output
// between two end-of-event words is compared with it as a sorted list.
// Then one event with disagreeing end-of-event ids on one line must set the
// sticky sync error of that board (its id is not checked). Last, one event
// is written into the event RAM of all 128 lines and playback mode is
// switched on: each board must return that event's tracks three times.
// Counted mechanisms, each of which must occur: hit copies, hit discards, TPU
// stalls, the sync error, playback restarts, output back-pressure.
// The run reports the cycles per event of the live phase. A watchdog bounds it.
// At default sizes the flattened simulation model of eight boards is very
// large: building it takes far longer than running it.
module tb_retina_demonstrator;
  import retina_pkg::*;
  import retina_model_pkg::*;

  localparam int NB = N_BOARDS;
  localparam int SD = 48, SH = 8, THR = 600;
  localparam int N_EV = 24;
  localparam int N_REP = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t            cfg;
  logic [N_IN-1:0] host_in_valid [NB];
  logic [N_IN-1:0] host_in_ready [NB];
  word_t           host_in_data  [NB][N_IN];
  logic            host_out_valid [NB];
  logic            host_out_ready [NB];
  word_t           host_out_data  [NB];
  board_status_t   status [NB];

  retina_demonstrator dut (.*);

  int checks = 0;
  int failures = 0;
  word_t stream [NB][N_IN][$];
  int    idx [NB][N_IN];
  word_t exp_ev [NB][$][$];      // [board][event] -> track words
  int    exp_id [NB][$];         // event id, -1: do not check
  word_t got [NB][$];
  int    n_ev_out [NB];
  int    n_backpressure = 0;
  bit    drive_on = 0;
  bit    pause = 0;
  word_t none [$];

  // one configuration write per cycle; cfg_end drops we
  task automatic cfg_put(int board, cfg_kind_e kind, int unit, int addr, logic [32:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, board: 3'(board), kind: kind, unit: 8'(unit), addr: 12'(addr), data: data};
  endtask

  task automatic cfg_end();
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  // build one event: hits onto host lines, expected tracks per board
  task automatic make_event(int id, int ntracks, bit to_ram);
    hit_t hits [$];
    hit_t kept [$];
    word_t words [NB][N_IN][$];
    for (int t = 0; t < ntracks; t++) begin
      automatic real u = 0.3 + 31.4 * $urandom_range(0, 1000) / 1000.0;
      automatic real v = 0.3 + 31.4 * $urandom_range(0, 1000) / 1000.0;
      for (int l = 0; l < 16; l++) hits.push_back(track_hit(u, v, l, 3));
    end
    repeat ($urandom_range(0, 6)) begin
      hit_t h;
      h.layer = 4'($urandom_range(0, 15));
      h.x = 14'($urandom_range(0, 3200));
      h.y = 14'($urandom_range(0, 3200));
      hits.push_back(h);
    end
    hits.shuffle();
    foreach (hits[i]) begin
      automatic int b = int'(hits[i].layer) / 2;
      automatic int s = $urandom_range(0, 1);
      automatic word_t w = '{eoe: 1'b0, data: hits[i]};
      words[b][8*s + $urandom_range(0, 3)].push_back(w);
      words[b][8*s + 4 + $urandom_range(0, 3)].push_back(w);
      if (hits[i].layer != 4'd15) kept.push_back(hits[i]);
    end
    for (int b = 0; b < NB; b++) begin
      word_t tr [$];
      for (int t = 0; t < N_TPU; t++) begin
        automatic int acc [16];
        tpu_levels(kept, 4 * t, 4 * b, SD, SH, acc);
        tpu_tracks(acc, THR, 4 * t, 4 * b, b * N_TPU + t, tr);
      end
      tr.sort();
      exp_ev[b].push_back(tr);
      exp_id[b].push_back(id);
      for (int i = 0; i < N_IN; i++) begin
        words[b][i].push_back('{eoe: 1'b1, data: 32'(id)});
        if (to_ram) begin
          foreach (words[b][i][k]) cfg_put(b, CFG_INPUT, i, k, words[b][i][k]);
          cfg_put(b, CFG_INPUT, i, 12'h801, 33'(words[b][i].size()));
        end else begin
          foreach (words[b][i][k]) stream[b][i].push_back(words[b][i][k]);
        end
      end
    end
  endtask

  // host line drivers
  always @(posedge clk) if (rst_n && drive_on) begin
    for (int b = 0; b < NB; b++) for (int i = 0; i < N_IN; i++) begin
      if (host_in_valid[b][i] && host_in_ready[b][i]) idx[b][i]++;
      if (host_in_valid[b][i] && !host_in_ready[b][i]) begin
      end else if (idx[b][i] < stream[b][i].size() && $urandom_range(0, 9) < 8) begin
        host_in_valid[b][i] <= 1'b1;
        host_in_data[b][i]  <= stream[b][i][idx[b][i]];
      end else begin
        host_in_valid[b][i] <= 1'b0;
      end
    end
  end

  // host output readers
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) begin
      if (host_out_valid[b] && !host_out_ready[b]) n_backpressure++;
      if (host_out_valid[b] && host_out_ready[b]) begin
        if (!host_out_data[b].eoe) got[b].push_back(host_out_data[b]);
        else begin
          automatic int e = n_ev_out[b];
          if (e >= exp_ev[b].size()) begin
            checks++;
            failures++;
            $display("FAIL board %0d: unexpected event end", b);
          end else begin
            got[b].sort();
            checks++;
            if (got[b] != exp_ev[b][e] ||
                (exp_id[b][e] >= 0 && host_out_data[b].data != 32'(exp_id[b][e]))) begin
              failures++;
              $display("FAIL board %0d event %0d (id %0d): %0d tracks, expected %0d", b, e,
                       host_out_data[b].data, got[b].size(), exp_ev[b][e].size());
            end
          end
          got[b].delete();
          n_ev_out[b]++;
        end
      end
      host_out_ready[b] <= !pause && ($urandom_range(0, 9) < 7);
    end
  end

  function automatic int min_events();
    int m = n_ev_out[0];
    for (int b = 1; b < NB; b++) if (n_ev_out[b] < m) m = n_ev_out[b];
    return m;
  endfunction

  initial begin
    automatic longint t0, t1;
    automatic int n_tracks = 0;
    cfg = '0;
    for (int b = 0; b < NB; b++) begin
      host_out_ready[b] = 1'b0;
      n_ev_out[b] = 0;
      for (int i = 0; i < N_IN; i++) begin
        host_in_valid[b][i] = 1'b0;
        host_in_data[b][i] = '0;
        idx[b][i] = 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // tuning registers and receptors of all 64 TPUs
    for (int b = 0; b < NB; b++)
      for (int t = 0; t < N_TPU; t++) begin
        cfg_put(b, CFG_TPU_REG, t, 0, 33'(SD));
        cfg_put(b, CFG_TPU_REG, t, 1, 33'(SH));
        cfg_put(b, CFG_TPU_REG, t, 2, 33'(THR));
        for (int c = 0; c < 16; c++)
          for (int l = 0; l < 16; l++)
            cfg_put(b, CFG_RECEPTOR, t, c * 16 + l,
                    33'({14'(rec(4 * t + c % 4, l)), 14'(rec(4 * b + c / 4, l))}));
      end
    // first-layer Mid-Switch splitters discard layer 15
    for (int b = 0; b < NB; b++)
      for (int s = 0; s < N_SEG; s++)
        for (int u = 0; u < 8; u++)
          for (int xb = 0; xb < 2; xb++)
            for (int yb = 0; yb < 2; yb++)
              cfg_put(b, CFG_ROUTE, 64 * s + (u < 4 ? u : u + 4),
                      int'({4'd15, 3'(xb), 3'(yb)}), 33'd0);
    cfg_end();
    $display("configuration done at cycle %0d", $time / 10);
    // live events
    for (int e = 0; e < N_EV; e++) make_event(100 + e, (e % 4 == 3) ? 0 : $urandom_range(1, 4), 0);
    foreach (exp_ev[0][e]) n_tracks += exp_ev[0][e].size();
    t0 = $time;
    drive_on = 1;
    while (min_events() < N_EV / 2) @(posedge clk);
    pause = 1;
    repeat (300) @(posedge clk);
    pause = 0;
    while (min_events() < N_EV) @(posedge clk);
    t1 = $time;
    $display("live phase: %0d events in %0d cycles, %0d cycles per event", N_EV, (t1 - t0) / 10,
             (t1 - t0) / 10 / N_EV);
    // misaligned end-of-event ids on board 0, line 5
    none.delete();
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < N_IN; i++)
        stream[b][i].push_back('{eoe: 1'b1, data: (b == 0 && i == 5) ? 32'd7 : 32'd500});
      exp_ev[b].push_back(none);
      exp_id[b].push_back(-1);
    end
    while (min_events() < N_EV + 1) @(posedge clk);
    // playback of one event from the event RAMs
    drive_on = 0;
    make_event(900, 3, 1);
    for (int b = 0; b < NB; b++)
      for (int r = 1; r < N_REP; r++) begin
        exp_ev[b].push_back(exp_ev[b][N_EV + 1]);
        exp_id[b].push_back(900);
      end
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < N_IN; i++) cfg_put(b, CFG_INPUT, i, 12'h800, 33'd1);
    cfg_end();
    while (min_events() < N_EV + 1 + N_REP) @(posedge clk);
    pause = 1;   // stop reading so that no later replay is taken as an error
    repeat (5) @(posedge clk);
    // mechanisms
    begin
      automatic int dup = 0, drop = 0, stl = 0, err = 0, wraps = 0;
      for (int b = 0; b < NB; b++) begin
        dup   += int'(status[b].dup_cycles);
        drop  += int'(status[b].drop_cycles);
        stl   += int'(status[b].tpu_stalls);
        wraps += int'(status[b].wraps);
        err   += int'(status[b].sync_err);
      end
      $display("mechanisms: copies %0d, discards %0d, TPU stalls %0d, sync errors %0d boards, playback restarts %0d, back-pressure %0d, tracks/board-0 %0d",
               dup, drop, stl, err, wraps, n_backpressure, n_tracks);
      checks += 6;
      if (dup == 0)   begin failures++; $display("FAIL no hit copies"); end
      if (drop == 0)  begin failures++; $display("FAIL no hit discards"); end
      if (stl == 0)   begin failures++; $display("FAIL no TPU stalls"); end
      if (wraps == 0) begin failures++; $display("FAIL no playback restarts"); end
      if (n_backpressure == 0) begin failures++; $display("FAIL no output back-pressure"); end
      if (!status[0].sync_err || err != 1) begin
        failures++;
        $display("FAIL sync error flags: board 0 %b, total %0d", status[0].sync_err, err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog, events out %0d", min_events());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
