// tb_neuron_update: the update kernel alone (50 neurons, UW = 4) fed by random
// current and thalamic streams and a randomly stalling spike consumer. A reference
// model adds the currents, advances every neuron and lists the spikes per step;
// the testbench checks each spike index, each DONE word, the final state, and,
// in a first quiet run, the step time of 2*ceil(N/UW) + 3 cycles (one row of UW
// neurons per cycle in each sweep).
module tb_neuron_update;
  import snn_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 50, UW = 4, ROWS = 13, AW = 4, IW = 6, STEPS = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, init_we, cur_valid, cur_ready, thal_valid, thal_ready;
  logic spk_valid, spk_ready, spike_valid;
  logic [31:0] n_steps, spike_step, stall_cycles;
  logic [AW-1:0] init_addr;
  neuron_state_t [UW-1:0] init_data;
  fp32_t [UW-1:0] cur_data;
  logic [UW-1:0][7:0] thal_data;
  logic [IW:0] spk_data;
  logic [IW-1:0] spike_idx;

  neuron_update #(.N(N), .UW(UW)) dut (.*);

  int checks = 0, failures = 0;
  fp32_t cur [STEPS][ROWS*UW];
  logic [7:0] thc [STEPS][ROWS*UW];
  fp32_t ru [N], ri [N];
  int rr [N];
  int exp_words [$];   // -1 = DONE
  bit quiet;
  int cs, cb, ts, tb_;

  // input streams
  always_comb begin
    for (int l = 0; l < UW; l++) begin
      cur_data[l]  = quiet ? '0 : cur[cs][cb * UW + l];
      thal_data[l] = quiet ? '0 : thc[ts][tb_ * UW + l];
    end
  end
  always_ff @(posedge clk) begin
    if (cur_valid && cur_ready) begin
      if (cb == ROWS - 1) begin cb <= 0; cs <= cs + 1; end else cb <= cb + 1;
    end
    if (thal_valid && thal_ready) begin
      if (tb_ == ROWS - 1) begin tb_ <= 0; ts <= ts + 1; end else tb_ <= tb_ + 1;
    end
  end

  // spike consumer
  int done_cycles [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && spk_valid && spk_ready) begin
      checks++;
      if (exp_words.size() == 0) begin failures++; end
      else begin
        if (spk_data[IW]) begin
          if (exp_words[0] != -1) failures++;
          done_cycles.push_back(cyc);
        end else if (int'(spk_data[IW-1:0]) != exp_words[0]) begin
          failures++;
          if (failures < 5) $display("SPIKE got %0d exp %0d", spk_data[IW-1:0], exp_words[0]);
        end
        void'(exp_words.pop_front());
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_state(bit zero);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      init_we = 1; init_addr = AW'(r);
      for (int l = 0; l < UW; l++) begin
        init_data[l].u = zero ? '0 : r2f(real'($urandom % 15500) / 1000.0);
        init_data[l].i = '0;
        init_data[l].r = '0;
        if (r * UW + l < N) begin ru[r*UW+l] = init_data[l].u; ri[r*UW+l] = '0; rr[r*UW+l] = 0; end
      end
    end
    @(negedge clk);
    init_we = 0;
  endtask

  task automatic run(int steps);
    @(negedge clk); cs = 0; cb = 0; ts = 0; tb_ = 0;
    n_steps = steps; start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    fp32_t x;
    neuron_state_t st;
    start = 0; init_we = 0; init_addr = '0; init_data = '0; n_steps = 0;
    cur_valid = 1; thal_valid = 1; spk_ready = 1; quiet = 1;
    cs = 0; cb = 0; ts = 0; tb_ = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // quiet run: no spikes, full-rate streams
    load_state(1);
    for (int t = 0; t < 3; t++) exp_words.push_back(-1);
    run(3);
    for (int k = 1; k < done_cycles.size(); k++) begin
      checks++;
      if (done_cycles[k] - done_cycles[k-1] != 2 * ROWS + 3) begin
        failures++;
        $display("STEP TIME %0d cycles, expected %0d", done_cycles[k] - done_cycles[k-1], 2 * ROWS + 3);
      end
    end
    // random run with reference
    quiet = 0;
    for (int t = 0; t < STEPS; t++)
      for (int n = 0; n < ROWS * UW; n++) begin
        cur[t][n] = r2f((real'($urandom % 40000) - 15000.0) / 10.0);
        thc[t][n] = 8'($urandom % 4);
      end
    load_state(0);
    for (int t = 0; t < STEPS; t++) begin
      for (int n = 0; n < N; n++) begin
        ri[n] = fadd(ri[n], cur[t][n]);
        if (rr[n] == 0) begin
          x = fadd(fmul(FP_P22, ru[n]), fmul(FP_P21, ri[n]));
          if (f2r(x) >= 15.0) begin exp_words.push_back(n); ru[n] = '0; rr[n] = TREF_TICS; end
          else ru[n] = x;
        end else begin ru[n] = '0; rr[n]--; end
        ri[n] = fadd(fmul(FP_P11, ri[n]), r2f(real'(thc[t][n]) * f2r(FP_WPSN)));
      end
      exp_words.push_back(-1);
    end
    $display("expected words: %0d", exp_words.size());
    fork
      run(STEPS);
      while (busy || start) begin
        @(negedge clk);
        cur_valid = ($urandom % 5) != 0; thal_valid = ($urandom % 5) != 0;
        spk_ready = ($urandom % 3) != 0;
      end
    join
    checks++;
    if (exp_words.size() != 0) begin failures++; $display("%0d words missing", exp_words.size()); end
    for (int n = 0; n < N; n++) begin
      st = dut.u_ram.mem[n / UW][n % UW];
      checks++;
      if (st.u != ru[n] || st.i != ri[n] || int'(st.r) != rr[n]) failures++;
    end
    checks++;
    if (stall_cycles == 0) failures++;
    $display("stall cycles %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
