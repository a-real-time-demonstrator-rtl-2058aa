// tb_sync_fifo: self-checking testbench for sync_fifo.
//
// A 4-deep FIFO is pushed and popped at random for 3000 cycles. A queue in the
// testbench is the reference: every word read must be the oldest word
// written, count must equal the queue size and in_ready must be low exactly
// when four words are held. A watchdog bounds the run.
module tb_sync_fifo;
  localparam int W = 12;
  localparam int D = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0]  in_data, out_data;
  logic [2:0]    count;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0;
  int failures = 0;
  int n_full = 0;
  logic [W-1:0] model [$];

  initial begin
    in_valid = 1'b0;
    out_ready = 1'b0;
    in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 9) < (cyc < 1500 ? 6 : 4));
      in_data   = W'($urandom);
      out_ready = ($urandom_range(0, 9) < (cyc < 1500 ? 4 : 6));
      @(posedge clk);
      checks++;
      if (count != 3'(model.size()) || in_ready != (model.size() < D) ||
          out_valid != (model.size() > 0)) begin
        failures++;
        $display("FAIL cycle %0d: count %0d model %0d ready %b", cyc, count, model.size(), in_ready);
      end
      if (!in_ready) n_full++;
      if (out_valid && out_ready) begin
        logic [W-1:0] exp_w;
        exp_w = model.pop_front();
        checks++;
        if (out_data != exp_w) begin
          failures++;
          $display("FAIL read %h expected %h", out_data, exp_w);
        end
      end
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (n_full == 0) begin
      failures++;
      $display("FAIL the FIFO was never full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
