// tb_spike_transfer: the transfer kernel alone (64 neurons, UW = 4, SC = 8, H = 4,
// D_MAX = 16, 32-entry queue). The testbench plays the update kernel: it takes
// the current beats of each step (randomly stalling) and checks them against a
// reference horizon buffer, then sends a random list of spiking neurons and DONE.
// Synapse index and rows come from ddr_read_model with a procedural network, the
// same in the reference. Also checks that every delay window was activated, that
// zero-weight fillers occurred and that the queue overflowed as the model says.
module tb_spike_transfer;
  import snn_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 64, UW = 4, SC = 8, H = 4, D_MAX = 16, QDEPTH = 32;
  localparam int NWIN = D_MAX / H, IW = 6, QW = 5, BROWS = N / SC, MAXR = 2;
  localparam int STEPS = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, cur_valid, cur_ready, spk_valid, spk_ready;
  logic [31:0] n_steps, rows_done, queue_overflows;
  logic [QW:0] queue_occupancy;
  fp32_t [UW-1:0] cur_data;
  logic [IW:0] spk_data;
  logic idx_req_valid, idx_req_ready, idx_rsp_valid, syn_req_valid, syn_req_ready, syn_rsp_valid;
  logic [31:0] idx_req_addr, idx_rsp_addr, syn_req_addr, syn_rsp_addr;
  logic [63:0] idx_rsp_data;
  synapse_t [SC-1:0] syn_rsp_data;

  spike_transfer #(.N(N), .UW(UW), .SC(SC), .H(H), .D_MAX(D_MAX), .QDEPTH(QDEPTH)) dut (.*);

  ddr_read_model #(.LAT(4)) u_idx (.clk, .rst_n, .req_valid(idx_req_valid),
    .req_ready(idx_req_ready), .req_addr(idx_req_addr), .rsp_valid(idx_rsp_valid),
    .rsp_addr(idx_rsp_addr));
  ddr_read_model #(.LAT(7)) u_syn (.clk, .rst_n, .req_valid(syn_req_valid),
    .req_ready(syn_req_ready), .req_addr(syn_req_addr), .rsp_valid(syn_rsp_valid),
    .rsp_addr(syn_rsp_addr));

  function automatic int nrows(int n, int k);
    return (n * 7 + k * 3) % (MAXR + 1);
  endfunction

  function automatic synapse_t syn_at(int unsigned a, int c);
    synapse_t s;
    int k;
    k = int'((a / MAXR) % NWIN);
    s.j = 24'(c + SC * int'((a * 5 + 32'(c) * 3) % BROWS));
    s.d = 8'(k * H + 1 + int'((a + 32'(c)) % H));
    s.w = ((a + 32'(c)) % 5 == 0) ? '0 : r2f(real'(int'((a * 13 + 32'(c) * 7) % 200) - 60) * 0.37);
    return s;
  endfunction

  always_comb begin
    int n, k;
    n = int'(idx_rsp_addr) / NWIN;
    k = int'(idx_rsp_addr) % NWIN;
    idx_rsp_data = {32'((n * NWIN + k) * MAXR + nrows(n, k)), 32'((n * NWIN + k) * MAXR)};
    for (int c = 0; c < SC; c++) syn_rsp_data[c] = syn_at(syn_rsp_addr, c);
  end

  int checks = 0, failures = 0, zero_lanes = 0;
  int win_seen [NWIN];
  fp32_t W [H][N];
  int qs [D_MAX][$];
  int occ = 0, ovf = 0;

  always @(posedge clk) if (rst_n) begin
    if (idx_req_valid && idx_req_ready) win_seen[idx_req_addr % NWIN]++;
    if (syn_rsp_valid) for (int c = 0; c < SC; c++) if (syn_rsp_data[c].w == '0) zero_lanes++;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int spk [$];
    int rt, o0;
    synapse_t s;
    start = 0; n_steps = STEPS; cur_ready = 0; spk_valid = 0; spk_data = '0;
    for (int r = 0; r < H; r++) for (int n = 0; n < N; n++) W[r][n] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int t = 0; t < STEPS; t++) begin
      // phase 1: receive and check the current row
      for (int b = 0; b < N / UW; b++) begin
        cur_ready = 0;
        while (!(cur_valid && cur_ready)) begin
          @(negedge clk);
          cur_ready = ($urandom % 3) != 0;
        end
        for (int l = 0; l < UW; l++) begin
          checks++;
          if (cur_data[l] != W[t % H][b * UW + l]) begin
            failures++;
            if (failures < 6) $display("t=%0d n=%0d got %h exp %h", t, b*UW+l, cur_data[l], W[t % H][b*UW+l]);
          end
          W[t % H][b * UW + l] = '0;
        end
        @(negedge clk);
      end
      cur_ready = 0;
      // reference phase 2
      for (int k = 0; k < NWIN; k++) begin
        rt = ((t - H * k - 1) % D_MAX + D_MAX) % D_MAX;
        foreach (qs[rt][e]) begin
          o0 = (qs[rt][e] * NWIN + k) * MAXR;
          for (int a = o0; a < o0 + nrows(qs[rt][e], k); a++)
            for (int c = 0; c < SC; c++) begin
              s = syn_at(a, c);
              W[(int'(s.d) + t) % H][s.j] = fadd(W[(int'(s.d) + t) % H][s.j], s.w);
            end
        end
      end
      // phase 3: send spikes of step t
      spk = {};
      for (int n = 0; n < N; n++) if ($urandom % 100 < ((t % 10 == 9) ? 40 : 5)) spk.push_back(n);
      occ -= qs[t % D_MAX].size();
      qs[t % D_MAX] = {};
      foreach (spk[m]) begin
        if (occ < QDEPTH) begin qs[t % D_MAX].push_back(spk[m]); occ++; end else ovf++;
      end
      spk.push_back(-1);
      foreach (spk[m]) begin
        spk_valid = 1;
        spk_data  = (spk[m] < 0) ? {1'b1, IW'(0)} : {1'b0, IW'(spk[m])};
        @(posedge clk);
        while (!spk_ready) @(posedge clk);
        @(negedge clk);
        spk_valid = 0;
        if ($urandom % 2) @(negedge clk);
      end
    end
    while (busy) @(negedge clk);
    checks++;
    if (int'(queue_overflows) != ovf) begin failures++; $display("overflows %0d exp %0d", queue_overflows, ovf); end
    checks++;
    if (ovf == 0 || zero_lanes == 0) failures++;
    for (int k = 0; k < NWIN; k++) begin checks++; if (win_seen[k] == 0) failures++; end
    $display("rows %0d, zero lanes %0d, overflows %0d", rows_done, zero_lanes, ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
