// tb_neuron_queue: opens slots in time order and enqueues random numbers of
// indices per step against a model of per-slot lists with a total capacity; checks
// every slot's head and count, every entry, the occupancy and the overflow count.
module tb_neuron_queue;
  localparam int QDEPTH = 16, D_MAX = 8, IW = 10, QW = 4, SW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic open_slot, enq;
  logic [SW-1:0] open_idx, rd_slot;
  logic [IW-1:0] enq_data, rd_data;
  logic [QW-1:0] slot_head, rd_idx;
  logic [QW:0]   slot_cnt, occupancy;
  logic [31:0]   overflows;
  int model [D_MAX][$];
  int occ = 0, ovf = 0;
  int checks = 0, failures = 0;

  neuron_queue #(.QDEPTH(QDEPTH), .D_MAX(D_MAX), .IW(IW)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ns;
    open_slot = 0; enq = 0; open_idx = '0; rd_slot = '0; enq_data = '0; rd_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      // check every slot
      for (int s = 0; s < D_MAX; s++) begin
        rd_slot = SW'(s);
        #1;
        checks++;
        if (int'(slot_cnt) != model[s].size()) begin
          failures++;
          if (failures < 5) $display("t=%0d slot %0d cnt %0d exp %0d", t, s, slot_cnt, model[s].size());
        end
        for (int e = 0; e < model[s].size(); e++) begin
          rd_idx = slot_head + QW'(e);
          #1;
          checks++;
          if (int'(rd_data) != model[s][e]) failures++;
        end
      end
      checks++;
      if (int'(occupancy) != occ || int'(overflows) != ovf) failures++;
      // open slot t mod D_MAX and enqueue
      @(negedge clk);
      open_slot = 1; open_idx = SW'(t % D_MAX);
      occ -= model[t % D_MAX].size();
      model[t % D_MAX] = {};
      @(negedge clk);
      open_slot = 0;
      ns = (t % 20 < 15) ? int'($urandom % 4) : int'($urandom % 9);
      for (int m = 0; m < ns; m++) begin
        enq = 1; enq_data = IW'($urandom);
        if (occ < QDEPTH) begin model[t % D_MAX].push_back(int'(enq_data)); occ++; end
        else ovf++;
        @(negedge clk);
      end
      enq = 0;
    end
    checks++;
    if (ovf == 0) begin failures++; $display("overflow never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
