// tb_channel_fifo: random producer and consumer against a queue model; checks data
// order, the blocking behaviour when full and empty, the count output, and that a
// full-rate producer and consumer move one word per cycle.
module tb_channel_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [3:0] count;
  logic [W-1:0] model [$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0, moved = 0, phase = 0;

  channel_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (int'(count) != model.size() || in_ready != (model.size() < DEPTH)
        || out_valid != (model.size() > 0)) begin
      failures++;
      if (failures < 5) $display("STATUS MISMATCH count %0d model %0d", count, model.size());
    end
    if (!in_ready) n_full++;
    if (!out_valid) n_empty++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== model[0]) failures++;
      void'(model.pop_front());
      moved++;
    end
    if (in_valid && in_ready) model.push_back(in_data);
  end

  initial begin
    int t0, m0;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      phase    = (k / 300) % 3;
      in_valid = phase == 1 ? ($urandom % 4 != 0) : ($urandom % 2 != 0);
      out_ready = phase == 2 ? ($urandom % 4 != 0) : ($urandom % 2 != 0);
      in_data  = W'($urandom);
    end
    // full rate: one word per cycle in steady state
    @(negedge clk); in_valid = 1; out_ready = 1;
    repeat (4) @(negedge clk);
    t0 = 0; m0 = moved;
    repeat (100) begin @(negedge clk); in_data = W'($urandom); end
    checks++;
    if (moved - m0 != 100) begin
      failures++;
      $display("THROUGHPUT: %0d words in 100 cycles", moved - m0);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full/empty not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
