// tb_input_stage: self-checking testbench for input_stage.
//
// Live mode: 40 random words from the host must come out in order, under
// random back-pressure. Playback: 5 words written into the event RAM with
// length 5 and mode 1 must come out cyclically (checked over 23 words) with a
// wrap pulse at every restart, while host words sent meanwhile wait. Back in
// live mode those host words must follow. A watchdog bounds the run.
module tb_input_stage;
  import retina_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t  cfg;
  logic  host_valid, host_ready, out_valid, out_ready, wrap;
  word_t host_data, out_data;

  input_stage #(.LINE_ID(9), .BOARD_ID(2), .FIFO_DEPTH(8), .PB_DEPTH(16)) dut (.*);

  int checks = 0;
  int failures = 0;
  int n_wrap = 0;
  word_t sent [$];
  word_t ram [5];

  always @(posedge clk) if (rst_n && wrap) n_wrap++;

  task automatic cfg_write(int addr, word_t data);
    @(negedge clk);
    cfg = '{we: 1'b1, board: 3'd2, kind: CFG_INPUT, unit: 8'd9, addr: 12'(addr), data: data};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic expect_word(word_t w, string what);
    int t = 0;
    @(negedge clk);
    out_ready = 1'b1;
    while (!out_valid && t < 100) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (out_data != w) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, out_data, w);
    end
    @(posedge clk);
    #1 out_ready = 1'b0;
  endtask

  initial begin
    cfg = '0;
    host_valid = 1'b0;
    host_data = '0;
    out_ready = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // live mode: send and receive concurrently
    fork
      for (int i = 0; i < 40; i++) begin
        word_t w;
        w = word_t'({1'($urandom_range(0, 1)), 32'($urandom)});
        sent.push_back(w);
        @(negedge clk);
        host_valid = 1'b1;
        host_data = w;
        @(posedge clk);
        while (!host_ready) @(posedge clk);
        #1 host_valid = 1'b0;
      end
      for (int i = 0; i < 40; i++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        expect_word(sent[i], "live");
      end
    join
    // playback
    for (int a = 0; a < 5; a++) begin
      ram[a] = word_t'({1'(a == 4), 32'($urandom)});
      cfg_write(a, ram[a]);
    end
    cfg_write(12'h801, 33'd5);
    // a host word sent during playback waits in the FIFO
    @(negedge clk);
    host_valid = 1'b1;
    host_data = 33'h0_1234_5678;
    @(negedge clk);
    host_valid = 1'b0;
    cfg_write(12'h800, 33'd1);
    for (int i = 0; i < 23; i++) expect_word(ram[i % 5], "playback");
    checks++;
    if (n_wrap != 4) begin
      failures++;
      $display("FAIL %0d wraps, expected 4", n_wrap);
    end
    cfg_write(12'h800, 33'd0);
    expect_word(33'h0_1234_5678, "live after playback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
