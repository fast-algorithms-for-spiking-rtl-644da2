// tb_horizon_buffer: writes random words into all banks and checks same-cycle reads
// against a model, including reading a word in the cycle it is written (old value)
// and in the next cycle (new value).
module tb_horizon_buffer;
  import snn_pkg::*;
  localparam int N = 50, H = 4, SC = 8, BROWS = 7, BW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [BW-1:0] addr [SC];
  fp32_t rdata [SC], wdata [SC];
  logic we [SC];
  fp32_t model [SC][H*BROWS];
  int checks = 0, failures = 0;

  horizon_buffer #(.N(N), .H(H), .SC(SC)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < SC; c++) begin we[c] = 0; addr[c] = '0; wdata[c] = '0; end
    for (int a = 0; a < H * BROWS; a++) begin
      @(negedge clk);
      for (int c = 0; c < SC; c++) begin
        we[c] = 1; addr[c] = BW'(a); wdata[c] = $urandom; model[c][a] = wdata[c];
      end
    end
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      for (int c = 0; c < SC; c++) begin
        addr[c]  = BW'($urandom % (H * BROWS));
        we[c]    = ($urandom % 2) != 0;
        wdata[c] = $urandom;
      end
      #1;
      for (int c = 0; c < SC; c++) begin
        checks++;
        if (rdata[c] !== model[c][addr[c]]) failures++;
        if (we[c]) model[c][addr[c]] = wdata[c];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
