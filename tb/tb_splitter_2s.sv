// tb_splitter_2s: self-checking testbench for splitter_2s.
//
// The splitter is unit 5 of board 3; its LUT gets a random mask per entry.
// Every input sends N_EV events: a random number of unique hits followed by
// an end-of-event word carrying the event number. Sources pause at random and
// sinks apply random back-pressure. The testbench keeps its own model of the
// routing (LUT contents written through cfg, and the wiring of the block), so
// for every output and event it knows the exact set of hits that must appear.
// Each word received is checked against that set; each end-of-event word is
// checked for its id and for the set being complete. A watchdog ends the run.
module tb_splitter_2s;
  import retina_pkg::*;

  localparam int NI   = 1;
  localparam int NO   = 2;
  localparam int N_EV = 40;
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t          cfg;
  logic [NI-1:0] in_valid, in_ready;
  word_t         in_data [NI];
  logic [NO-1:0] out_valid, out_ready;
  word_t         out_data [NO];
  logic          dup, drop, sync_err;

  splitter_2s #(.UNIT_ID(5), .BOARD_ID(3)) dut (
    .clk, .rst_n, .cfg,
    .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_data(in_data[0]),
    .out_valid, .out_ready, .out_data, .dup, .drop
  );
  assign sync_err = 1'b0;

  int checks = 0;
  int failures = 0;
  int n_dup = 0, n_drop = 0, n_err = 0;

  bit [1:0] lut [int];
  int       exp_cnt [logic [63:0]];
  int       pending [NO][N_EV];
  int       cur_ev [NO];
  word_t    stream [NI][$];
  int       idx [NI];

  function automatic bit [1:0] lk(int unit, hit_t h);
    int key = unit * 4096 + int'(route_index(h));
    return lut.exists(key) ? lut[key] : 2'b11;
  endfunction

  function automatic logic [NO-1:0] reach(int i, hit_t h);
    logic [NO-1:0] m = '0;
    m = lk(5, h);
    return m;
  endfunction

  function automatic logic [63:0] key(int o, int e, word_t w);
    return {7'(o), 7'(e), 17'(0), w};
  endfunction

  task automatic cfg_write(int unit, int addr, int data);
    @(negedge clk);
    cfg.we    = 1'b1;
    cfg.kind  = CFG_ROUTE;
    cfg.board = 3'(BOARD);
    cfg.unit  = 8'(unit);
    cfg.addr  = 12'(addr);
    cfg.data  = 33'(data);
    @(negedge clk);
    cfg.we    = 1'b0;
  endtask

  localparam int BOARD = 3;

  initial begin
    automatic int serial = 0;
    cfg = '0;
    for (int i = 0; i < NI; i++) begin
      in_valid[i] <= 1'b0;
      in_data[i]  <= '0;
      idx[i]      = 0;
    end
    out_ready <= '0;
    for (int o = 0; o < NO; o++) cur_ev[o] = 0;
    for (int o = 0; o < NO; o++) for (int e = 0; e < N_EV; e++) pending[o][e] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // program every LUT entry the hits can use (layers 0-3, x,y bins 0-1)
    for (int u = 0; u < 1; u++)
      for (int l = 0; l < 4; l++)
        for (int xb = 0; xb < 2; xb++)
          for (int yb = 0; yb < 2; yb++) begin
            hit_t h;
            automatic int r = $urandom_range(0, 9);
            automatic bit [1:0] v = (r < 2) ? 2'b00 : (r < 5) ? 2'b11 : (r < 7) ? 2'b01 : 2'b10;
            h.layer = 4'(l);
            h.x = {3'(xb), 11'(0)};
            h.y = {3'(yb), 11'(0)};
            lut[(5 + u) * 4096 + int'(route_index(h))] = v;
            cfg_write(5 + u, int'(route_index(h)), int'(v));
          end
    // build the streams and the expected sets
    for (int e = 0; e < N_EV; e++)
      for (int i = 0; i < NI; i++) begin
        automatic int nh = $urandom_range(0, 8);
        for (int n = 0; n < nh; n++) begin
          hit_t h;
          word_t w;
          logic [NO-1:0] m;
          h.layer = 4'($urandom_range(0, 3));
          h.x = {3'($urandom_range(0, 1)), 11'(serial)};
          h.y = {3'($urandom_range(0, 1)), 11'($urandom_range(0, 2047))};
          serial++;
          w = '{eoe: 1'b0, data: h};
          stream[i].push_back(w);
          m = reach(i, h);
          for (int o = 0; o < NO; o++) if (m[o]) begin
            exp_cnt[key(o, e, w)] = exp_cnt.exists(key(o, e, w)) ? exp_cnt[key(o, e, w)] + 1 : 1;
            pending[o][e]++;
          end
        end
        stream[i].push_back('{eoe: 1'b1, data: 32'(e)});
      end
  end

  // sources
  always @(posedge clk) if (rst_n && !cfg.we) begin
    for (int i = 0; i < NI; i++) begin
      if (in_valid[i] && in_ready[i]) idx[i]++;
      if (in_valid[i] && !in_ready[i]) begin
        // hold
      end else if (idx[i] < stream[i].size() && $urandom_range(0, 9) < 7) begin
        in_valid[i] <= 1'b1;
        in_data[i]  <= stream[i][idx[i]];
      end else begin
        in_valid[i] <= 1'b0;
      end
    end
    for (int o = 0; o < NO; o++) out_ready[o] <= ($urandom_range(0, 9) < 7);
  end

  // sinks
  always @(posedge clk) if (rst_n) begin
    if (dup) n_dup++;
    if (drop) n_drop++;
    if (sync_err) n_err++;
    for (int o = 0; o < NO; o++) if (out_valid[o] && out_ready[o]) begin
      automatic word_t w = out_data[o];
      automatic int e = cur_ev[o];
      checks++;
      if (e >= N_EV) begin
        checks--;  // words of the extra phase after the last event are not part of the stream check
      end else if (w.eoe) begin
        if (w.data != 32'(e) || pending[o][e] != 0) begin
          failures++;
          $display("FAIL out %0d: end of event %0d id %0d, %0d hits missing", o, e, w.data, pending[o][e]);
        end
        cur_ev[o]++;
      end else if (!exp_cnt.exists(key(o, e, w)) || exp_cnt[key(o, e, w)] == 0) begin
        failures++;
        $display("FAIL out %0d event %0d: unexpected hit %h", o, e, w.data);
      end else begin
        exp_cnt[key(o, e, w)]--;
        pending[o][e]--;
      end
    end
  end

  initial begin
    automatic int cyc = 0;
    automatic bit done = 0;
    while (!done && cyc < WATCHDOG) begin
      @(posedge clk);
      cyc++;
      done = 1;
      for (int o = 0; o < NO; o++) if (cur_ev[o] < N_EV) done = 0;
    end
    if (!done) begin
      failures++;
      $display("FAIL watchdog after %0d cycles", cyc);
    end
    // the event ids always agree here
    checks++;
    if (n_err != 0) begin
      failures++;
      $display("FAIL sync_err raised %0d times", n_err);
    end
    $display("hits copied %0d cycles, dropped %0d cycles, sync errors %0d", n_dup, n_drop, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
