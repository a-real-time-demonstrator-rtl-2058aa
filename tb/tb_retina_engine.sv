// tb_retina_engine: self-checking testbench for retina_engine.
//
// Receptors of cell 5 (TPU 3, board 1) are written for all 16 layers, with
// writes addressed to other cells and TPUs in between that must be ignored.
// Then, for 400 cycles, 0 to 4 hits per cycle are placed around the
// receptors and the accumulator is compared every cycle with the reference
// weight model; search distance and width are changed halfway. Further
// phases check clear and saturation. A watchdog bounds the run.
module tb_retina_engine;
  import retina_pkg::*;
  import retina_model_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_t               cfg;
  logic [3:0]         hit_valid;
  hit_t               hit [4];
  logic [COORD_W-1:0] sd;
  logic [3:0]         sig_sh;
  logic               clear;
  logic [15:0]        acc;

  retina_engine #(.CELL_ID(5), .TPU_ID(3), .BOARD_ID(1)) dut (.*);

  int checks = 0;
  int failures = 0;
  int rx [16], ry [16];
  longint model = 0;
  int n_nonzero = 0;

  task automatic cfg_write(int board, int unit, int cidx, int layer, int x, int y);
    @(negedge clk);
    cfg = '{we: 1'b1, board: 3'(board), kind: CFG_RECEPTOR, unit: 8'(unit),
            addr: 12'({cidx[3:0], layer[3:0]}), data: 33'({14'(x), 14'(y)})};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic step(bit do_clear, int n);
    longint s = 0;
    hit_valid = '0;
    for (int k = 0; k < 4; k++) begin
      int l = $urandom_range(0, 15);
      hit[k].layer = 4'(l);
      hit[k].x = 14'(rx[l] + $urandom_range(0, 80) - 40);
      hit[k].y = 14'(ry[l] + $urandom_range(0, 80) - 40);
      if (k < n) begin
        hit_valid[k] = 1'b1;
        s += weight(int'(hit[k].x), int'(hit[k].y), rx[l], ry[l], int'(sd), int'(sig_sh));
      end
    end
    if (s != 0) n_nonzero++;
    clear = do_clear;
    model = (do_clear ? 0 : model) + s;
    if (model > AMAX) model = AMAX;
    @(negedge clk);
    checks++;
    if (longint'(acc) != model) begin
      failures++;
      $display("FAIL acc %0d expected %0d", acc, model);
    end
  endtask

  initial begin
    cfg = '0;
    hit_valid = '0;
    clear = 1'b0;
    sd = 14'd48;
    sig_sh = 4'd8;
    for (int k = 0; k < 4; k++) hit[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 16; l++) begin
      rx[l] = int'($urandom_range(0, 8000)) - 4000;
      ry[l] = int'($urandom_range(0, 8000)) - 4000;
      cfg_write(1, 3, 5, l, rx[l], ry[l]);
      cfg_write(1, 3, 6, l, 0, 0);   // other cell
      cfg_write(2, 3, 5, l, 0, 0);   // other board
      cfg_write(1, 4, 5, l, 0, 0);   // other TPU
    end
    @(negedge clk);
    for (int i = 0; i < 200; i++) step(0, $urandom_range(0, 4));
    sd = 14'd30;
    sig_sh = 4'd5;
    for (int i = 0; i < 200; i++) step(0, $urandom_range(0, 4));
    step(1, 0);
    checks++;
    if (acc != 0) begin
      failures++;
      $display("FAIL clear left %0d", acc);
    end
    // saturation: four hits exactly on the receptor every cycle
    clear = 1'b0;
    for (int i = 0; i < 140; i++) begin
      hit_valid = 4'hf;
      for (int k = 0; k < 4; k++) begin
        hit[k].layer = 4'(k);
        hit[k].x = 14'(rx[k]);
        hit[k].y = 14'(ry[k]);
      end
      model = model + 4 * WMAX;
      if (model > AMAX) model = AMAX;
      @(negedge clk);
    end
    checks++;
    if (acc != 16'hffff || model != AMAX) begin
      failures++;
      $display("FAIL saturation %0d", acc);
    end
    checks++;
    if (n_nonzero < 50) begin
      failures++;
      $display("FAIL only %0d cycles with weight", n_nonzero);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
