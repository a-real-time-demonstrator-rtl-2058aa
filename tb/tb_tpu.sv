// tb_tpu: self-checking testbench for tpu.
//
// TPU 2 of board 1, covering cells u = 8..11, v = 4..7. Its receptors are
// written from the test geometry of retina_model_pkg, and its search
// distance, width and threshold through the tuning registers. 60 events are
// sent on the four lines, each with 0 to 2 straight tracks (one hit per layer,
// layer l on line l%4, a few units of noise) and a few random hits. The
// reference model gives the exact sequence of track words and the
// end-of-event word of every event; the output is compared word by word.
// Output back-pressure is random, with a long pause that must make the TPU
// stall on a finished event. The last event carries a wrong id on one line
// and must raise sync_err. A watchdog bounds the run.
module tb_tpu;
  import retina_pkg::*;
  import retina_model_pkg::*;

  localparam int U0 = 8, V0 = 4, GTPU = 10;
  localparam int SD = 48, SH = 8, THR = 600;
  localparam int N_EV = 60;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t       cfg;
  logic [3:0] in_valid, in_ready;
  word_t      in_data [4];
  logic       out_valid, out_ready, stall, sync_err;
  word_t      out_data;

  tpu #(.TPU_ID(2), .BOARD_ID(1), .U0(U0), .V0(V0)) dut (.*);

  int checks = 0;
  int failures = 0;
  int n_stall = 0, n_err = 0, n_tracks = 0, n_out_ev = 0;
  bit pause = 0;
  word_t stream [4][$];
  int    idx [4];
  word_t expected [$];

  task automatic cfg_write(cfg_kind_e kind, int unit, int addr, logic [32:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, board: 3'd1, kind: kind, unit: 8'(unit), addr: 12'(addr), data: data};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  initial begin
    cfg = '0;
    for (int k = 0; k < 4; k++) begin
      in_valid[k] <= 1'b0;
      in_data[k] <= '0;
      idx[k] = 0;
    end
    out_ready <= 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cfg_write(CFG_TPU_REG, 2, 0, 33'(SD));
    cfg_write(CFG_TPU_REG, 2, 1, 33'(SH));
    cfg_write(CFG_TPU_REG, 2, 2, 33'(THR));
    for (int c = 0; c < 16; c++)
      for (int l = 0; l < 16; l++)
        cfg_write(CFG_RECEPTOR, 2, c * 16 + l,
                  33'({14'(rec(U0 + c % 4, l)), 14'(rec(V0 + c / 4, l))}));
    for (int e = 0; e < N_EV; e++) begin
      hit_t hits [$];
      automatic int nt = $urandom_range(0, 2);
      automatic int acc [16];
      for (int t = 0; t < nt; t++) begin
        automatic real u = U0 + 0.2 + 3.6 * $urandom_range(0, 1000) / 1000.0;
        automatic real v = V0 + 0.2 + 3.6 * $urandom_range(0, 1000) / 1000.0;
        for (int l = 0; l < 16; l++) hits.push_back(track_hit(u, v, l, 3));
      end
      repeat ($urandom_range(0, 5)) begin
        hit_t h;
        h.layer = 4'($urandom_range(0, 15));
        h.x = 14'($urandom_range(0, 1500));
        h.y = 14'($urandom_range(0, 1000));
        hits.push_back(h);
      end
      hits.shuffle();
      foreach (hits[i]) stream[int'(hits[i].layer) % 4].push_back('{eoe: 1'b0, data: hits[i]});
      for (int k = 0; k < 4; k++) stream[k].push_back('{eoe: 1'b1, data: 32'(1000 + e)});
      tpu_levels(hits, U0, V0, SD, SH, acc);
      tpu_tracks(acc, THR, U0, V0, GTPU, expected);
      expected.push_back('{eoe: 1'b1, data: 32'(1000 + e)});
    end
    // an event whose end-of-event words disagree on line 3
    for (int k = 0; k < 4; k++) stream[k].push_back('{eoe: 1'b1, data: (k == 3) ? 32'd7 : 32'd5000});
    expected.push_back('{eoe: 1'b1, data: 32'd5000});
  end

  // sources
  always @(posedge clk) if (rst_n && !cfg.we) begin
    for (int k = 0; k < 4; k++) begin
      if (in_valid[k] && in_ready[k]) idx[k]++;
      if (in_valid[k] && !in_ready[k]) begin
      end else if (idx[k] < stream[k].size() && $urandom_range(0, 9) < 8) begin
        in_valid[k] <= 1'b1;
        in_data[k]  <= stream[k][idx[k]];
      end else begin
        in_valid[k] <= 1'b0;
      end
    end
    out_ready <= !pause && ($urandom_range(0, 9) < 8);
  end

  // sink
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (sync_err) n_err++;
    if (out_valid && out_ready) begin
      checks++;
      if (expected.size() == 0) begin
        failures++;
        $display("FAIL unexpected word %h", out_data);
      end else begin
        automatic word_t w = expected.pop_front();
        if (out_data != w) begin
          failures++;
          $display("FAIL event %0d: got %h expected %h", n_out_ev, out_data, w);
        end
      end
      if (out_data.eoe) n_out_ev++;
      else n_tracks++;
    end
  end

  initial begin
    automatic int cyc = 0;
    wait (rst_n && !cfg.we && stream[0].size() > 0);
    while (n_out_ev < 10 && cyc < 100000) begin @(posedge clk); cyc++; end
    pause = 1;
    repeat (400) @(posedge clk);
    pause = 0;
    while (n_out_ev < N_EV + 1 && cyc < 100000) begin @(posedge clk); cyc++; end
    repeat (5) @(posedge clk);
    checks++;
    if (n_out_ev != N_EV + 1 || expected.size() != 0) begin
      failures++;
      $display("FAIL %0d events out, %0d words missing", n_out_ev, expected.size());
    end
    checks++;
    if (n_stall == 0 || n_tracks < 20) begin
      failures++;
      $display("FAIL stalls %0d tracks %0d", n_stall, n_tracks);
    end
    checks++;
    if (n_err != 1) begin
      failures++;
      $display("FAIL sync_err pulsed %0d times, expected 1", n_err);
    end
    $display("tracks %0d, stall cycles %0d", n_tracks, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
