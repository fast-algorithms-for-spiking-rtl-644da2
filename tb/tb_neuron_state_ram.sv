// tb_neuron_state_ram: random reads and writes against a model memory; checks the
// one-cycle read latency and that a read of the row being written returns the old
// contents.
module tb_neuron_state_ram;
  import snn_pkg::*;
  localparam int N = 100, UW = 4, ROWS = 25, AW = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  neuron_state_t [UW-1:0] rd_data, wr_data, model [ROWS], exp_d;
  int checks = 0, failures = 0;
  logic pend;

  neuron_state_ram #(.N(N), .UW(UW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = '0; wr_addr = '0; wr_data = '0; pend = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(r);
      for (int l = 0; l < UW; l++) wr_data[l] = {$urandom, $urandom, 8'($urandom)};
      model[r] = wr_data;
    end
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rd_data !== exp_d) begin
          failures++;
          if (failures < 5) $display("MISMATCH at cycle %0d", k);
        end
      end
      rd_en   = ($urandom % 4) != 0;
      rd_addr = AW'($urandom % ROWS);
      wr_en   = ($urandom % 2) != 0;
      wr_addr = ($urandom % 4 == 0) ? rd_addr : AW'($urandom % ROWS);
      for (int l = 0; l < UW; l++) wr_data[l] = {$urandom, $urandom, 8'($urandom)};
      pend  = rd_en;
      exp_d = model[rd_addr];
      if (wr_en) model[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
