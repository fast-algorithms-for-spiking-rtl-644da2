// snn_tb_env: end-to-end test harness for snn_top.
//
// Builds a procedurally generated network (no stored tables): for neuron n and
// delay window k the synapse index gives rows [o0, o0 + nr(n,k)) with
// o0 = (n*NWIN + k)*MAXR; every row has SC lanes whose destinations are congruent
// to the lane number, weights of both signs, some zero-weight fillers, and delays
// inside the window. Thalamic counts, initial potentials and all synapse fields are
// hash functions of their coordinates. Off-chip reads go through ddr_read_model.
//
// A reference model written with double-precision reals rounded to single after
// every operation (fp_ref_pkg) runs the same algorithm in the same order before the
// simulation; the testbench then checks every spike (step and index, in order) and
// the final neuron state. It also counts how often each mechanism of the design
// happened and fails a mechanism that never did.
//
// FULL = 1 instantiates snn_top with all its defaults (no parameter overrides); the
// environment's own N, UW, SC, H, D_MAX and QDEPTH must then equal those defaults.
module snn_tb_env
  import snn_pkg::*;
  import fp_ref_pkg::*;
#(
  parameter bit FULL      = 0,
  parameter int N         = 200,
  parameter int UW        = 4,
  parameter int SC        = 8,
  parameter int H         = 4,
  parameter int D_MAX     = 16,
  parameter int QDEPTH    = 64,
  parameter int UPD_DEPTH = 4,
  parameter int SPK_DEPTH = 8,
  parameter int STEPS     = 40,
  parameter int MAXR      = 3,     // maximum synapse rows per neuron and window
  parameter int ROW_PCT   = 60,    // percent of (neuron, window) pairs with rows
  parameter int NEAR_PM   = 40,    // per mille of neurons started near threshold
  parameter int WSCALE    = 600,   // weight magnitude range
  parameter int LAT       = 6,
  parameter int TMOD      = 4,     // thalamic counts are 0 .. TMOD-1
  parameter int MAX_CYCLES = 2000000
);
  localparam int NWIN  = D_MAX / H;
  localparam int ROWS  = (N + UW - 1) / UW;
  localparam int AW    = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int IW    = $clog2(N);
  localparam int QW    = $clog2(QDEPTH);
  localparam int BROWS = (N + SC - 1) / SC;

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- stimulus
  function automatic int unsigned hsh(int unsigned a, int unsigned b, int unsigned c);
    int unsigned x;
    x = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77 ^ (c + 32'h1234567) * 32'hC2B2AE3D;
    x = x ^ (x >> 15); x = x * 32'h2C1B3C6D;
    x = x ^ (x >> 12); x = x * 32'h297A2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

  function automatic int nrows(int n, int k);
    int unsigned h;
    h = hsh(n, k, 11);
    if ((h % 100) >= ROW_PCT) return 0;
    return 1 + int'((h >> 8) % MAXR);
  endfunction

  function automatic synapse_t syn_at(int unsigned a, int c);
    synapse_t s;
    int unsigned h, j;
    int k;
    k = int'((a / MAXR) % NWIN);
    h = hsh(a, c, 23);
    j = 32'(c) + 32'(SC) * ((h >> 4) % 32'(BROWS));
    if (j >= 32'(N)) j = 32'(c);
    s.j = 24'(j);
    s.d = 8'((k * H + 1 + int'((h >> 20) % H)) % 64);
    if ((h % 8) == 0) s.w = '0;       // vacancy filler
    else s.w = r2f(((h % 8) < 3 ? -4.0 : 1.0) * real'((h >> 8) % WSCALE) * 0.73);
    return s;
  endfunction

  function automatic logic [7:0] tcnt(int t, int n);
    return 8'(hsh(t, n, 5) % TMOD);
  endfunction

  function automatic fp32_t u_init(int n);
    int unsigned h;
    h = hsh(n, 0, 77);
    if ((h % 1000) < NEAR_PM) return r2f(14.0 + real'((h >> 10) % 1400) / 1000.0);
    return r2f(real'((h >> 10) % 10000) / 1000.0);
  endfunction

  // ---------------------------------------------------------------- reference
  fp32_t ref_u [N];
  fp32_t ref_i [N];
  int    ref_r [N];
  fp32_t ref_w [H][N];
  int    ref_spk_t [$];
  int    ref_spk_n [$];
  int    qslot [D_MAX][$];
  int    q_occ;
  int    ref_overflows;

  task automatic run_reference();
    int    spk [$];
    fp32_t i1, x;
    int    rt, o0, nr;
    synapse_t s;
    int    row;
    for (int n = 0; n < N; n++) begin
      ref_u[n] = u_init(n); ref_i[n] = '0; ref_r[n] = 0;
    end
    for (int r = 0; r < H; r++) for (int n = 0; n < N; n++) ref_w[r][n] = '0;
    q_occ = 0; ref_overflows = 0;
    for (int t = 0; t < STEPS; t++) begin
      spk = {};
      for (int n = 0; n < N; n++) begin
        i1 = fadd(ref_i[n], ref_w[t % H][n]);
        ref_w[t % H][n] = '0;
        if (ref_r[n] == 0) begin
          x = fadd(fmul(FP_P22, ref_u[n]), fmul(FP_P21, i1));
          if (f2r(x) >= 15.0) begin
            spk.push_back(n);
            ref_u[n] = '0;
            ref_r[n] = TREF_TICS;
          end else begin
            ref_u[n] = x;
          end
        end else begin
          ref_u[n] = '0;
          ref_r[n] = ref_r[n] - 1;
        end
        ref_i[n] = fadd(fmul(FP_P11, i1), r2f(real'(tcnt(t, n)) * f2r(FP_WPSN)));
      end
      foreach (spk[m]) begin ref_spk_t.push_back(t); ref_spk_n.push_back(spk[m]); end
      for (int k = 0; k < NWIN; k++) begin
        rt = ((t - H * k - 1) % D_MAX + D_MAX) % D_MAX;
        foreach (qslot[rt][e]) begin
          nr = nrows(qslot[rt][e], k);
          o0 = (qslot[rt][e] * NWIN + k) * MAXR;
          for (int a = o0; a < o0 + nr; a++) begin
            for (int c = 0; c < SC; c++) begin
              s   = syn_at(a, c);
              row = (int'(s.d) + t) % H;
              ref_w[row][s.j] = fadd(ref_w[row][s.j], s.w);
            end
          end
        end
      end
      q_occ = q_occ - qslot[t % D_MAX].size();
      qslot[t % D_MAX] = {};
      foreach (spk[m]) begin
        if (q_occ < QDEPTH) begin qslot[t % D_MAX].push_back(spk[m]); q_occ++; end
        else ref_overflows++;
      end
    end
  endtask

  // ---------------------------------------------------------------- DUT
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   start;
  logic [31:0]            n_steps;
  logic                   busy;
  logic                   init_we;
  logic [AW-1:0]          init_addr;
  neuron_state_t [UW-1:0] init_data;
  logic                   thal_valid, thal_ready;
  logic [UW-1:0][7:0]     thal_data;
  logic                   idx_req_valid, idx_req_ready, idx_rsp_valid;
  logic [31:0]            idx_req_addr, idx_rsp_addr;
  logic [63:0]            idx_rsp_data;
  logic                   syn_req_valid, syn_req_ready, syn_rsp_valid;
  logic [31:0]            syn_req_addr, syn_rsp_addr;
  synapse_t [SC-1:0]      syn_rsp_data;
  logic                   spike_valid;
  logic [IW-1:0]          spike_idx;
  logic [31:0]            spike_step, stall_cycles, rows_done, overflows;
  logic [QW:0]            occupancy;
  logic                   spk_full;
  logic [$clog2(UPD_DEPTH):0] upd_level;

  // final neuron state, copied out of the state memory on request
  neuron_state_t hw_st [N];
  event          dump_req, dump_ack;

  if (FULL) begin : g_full
    snn_top dut (.*, .update_stall_cycles(stall_cycles), .queue_overflows(overflows),
                 .queue_occupancy(occupancy), .to_transfer_full(spk_full),
           .to_update_level(upd_level));
    initial forever begin
      @(dump_req);
      for (int n = 0; n < N; n++) hw_st[n] = dut.u_update.u_ram.mem[n / UW][n % UW];
      ->dump_ack;
    end
  end else begin : g_red
    snn_top #(.N(N), .UW(UW), .SC(SC), .H(H), .D_MAX(D_MAX), .QDEPTH(QDEPTH),
              .UPD_DEPTH(UPD_DEPTH), .SPK_DEPTH(SPK_DEPTH))
      dut (.*, .update_stall_cycles(stall_cycles), .queue_overflows(overflows),
           .queue_occupancy(occupancy), .to_transfer_full(spk_full),
           .to_update_level(upd_level));
    initial forever begin
      @(dump_req);
      for (int n = 0; n < N; n++) hw_st[n] = dut.u_update.u_ram.mem[n / UW][n % UW];
      ->dump_ack;
    end
  end

  ddr_read_model #(.LAT(LAT)) u_idx_mem (
    .clk, .rst_n, .req_valid(idx_req_valid), .req_ready(idx_req_ready),
    .req_addr(idx_req_addr), .rsp_valid(idx_rsp_valid), .rsp_addr(idx_rsp_addr));
  ddr_read_model #(.LAT(LAT + 2)) u_syn_mem (
    .clk, .rst_n, .req_valid(syn_req_valid), .req_ready(syn_req_ready),
    .req_addr(syn_req_addr), .rsp_valid(syn_rsp_valid), .rsp_addr(syn_rsp_addr));

  always_comb begin
    int n, k;
    n = int'(idx_rsp_addr) / NWIN;
    k = int'(idx_rsp_addr) % NWIN;
    idx_rsp_data[31:0]  = 32'((n * NWIN + k) * MAXR);
    idx_rsp_data[63:32] = 32'((n * NWIN + k) * MAXR + nrows(n, k));
    for (int c = 0; c < SC; c++) syn_rsp_data[c] = syn_at(syn_rsp_addr, c);
  end

  // thalamic stream: beat b of step t carries neurons b*UW .. b*UW+UW-1
  int th_t, th_b;
  always_comb
    for (int l = 0; l < UW; l++) thal_data[l] = tcnt(th_t, th_b * UW + l);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      th_t <= 0; th_b <= 0; thal_valid <= 1'b0;
    end else begin
      if (thal_valid && thal_ready) begin
        if (th_b == ROWS - 1) begin th_b <= 0; th_t <= th_t + 1; end
        else th_b <= th_b + 1;
      end
      thal_valid <= ($urandom % 100) < 90;
    end
  end

  // ---------------------------------------------------------------- checking
  int got = 0;
  int n_stall_seen = 0, n_full_seen = 0, n_zero_lanes = 0, n_thal_wait = 0;
  int win_seen [NWIN];
  int cycles = 0;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (spike_valid) begin
      checks++;
      if (got >= ref_spk_t.size() || spike_step != 32'(ref_spk_t[got])
          || int'(spike_idx) != ref_spk_n[got]) begin
        failures++;
        if (failures < 10)
          $display("SPIKE MISMATCH #%0d: got step %0d idx %0d, expected step %0d idx %0d",
                   got, spike_step, spike_idx,
                   got < ref_spk_t.size() ? ref_spk_t[got] : -1,
                   got < ref_spk_n.size() ? ref_spk_n[got] : -1);
      end
      got++;
    end
    if (spk_full && busy) n_full_seen++;
    if (idx_req_valid && idx_req_ready) win_seen[int'(idx_req_addr) % NWIN]++;
    if (syn_rsp_valid) for (int c = 0; c < SC; c++) if (syn_rsp_data[c].w == '0) n_zero_lanes++;
    if (!thal_valid && busy) n_thal_wait++;
  end

  task automatic mech(string name, int count);
    checks++;
    $display("mechanism %-28s %0d", name, count);
    if (count == 0) begin
      failures++;
      $display("MECHANISM NEVER EXERCISED: %s", name);
    end
  endtask

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("WATCHDOG: simulation did not finish in %0d cycles", MAX_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    neuron_state_t st;
    int c_start;
    start = 0; n_steps = STEPS; init_we = 0; init_addr = '0; init_data = '0;
    run_reference();
    $display("reference: %0d spikes in %0d steps, %0d queue overflows",
             ref_spk_t.size(), STEPS, ref_overflows);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int r = 0; r < ROWS; r++) begin
      init_we   <= 1'b1;
      init_addr <= AW'(r);
      for (int l = 0; l < UW; l++) begin
        st.u = (r * UW + l < N) ? u_init(r * UW + l) : '0;
        st.i = '0;
        st.r = '0;
        init_data[l] <= st;
      end
      @(posedge clk);
    end
    init_we <= 1'b0;
    start   <= 1'b1;
    @(posedge clk);
    start   <= 1'b0;
    c_start = cycles;
    @(posedge clk);
    while (busy) @(posedge clk);
    $display("run: %0d steps in %0d cycles", STEPS, cycles - c_start);
    // every spike seen
    checks++;
    if (got != ref_spk_t.size()) begin
      failures++;
      $display("SPIKE COUNT: got %0d expected %0d", got, ref_spk_t.size());
    end
    // final neuron state
    fork
      ->dump_req;
      @(dump_ack);
    join
    for (int n = 0; n < N; n++) begin
      st = hw_st[n];
      checks++;
      if (st.u != ref_u[n] || st.i != ref_i[n] || int'(st.r) != ref_r[n]) begin
        failures++;
        if (failures < 10)
          $display("STATE MISMATCH n=%0d: u %h/%h i %h/%h r %0d/%0d", n, st.u, ref_u[n],
                   st.i, ref_i[n], st.r, ref_r[n]);
      end
    end
    checks++;
    if (int'(overflows) != ref_overflows) begin
      failures++;
      $display("OVERFLOW COUNT: got %0d expected %0d", overflows, ref_overflows);
    end
    mech("update stall on spikes", int'(stall_cycles));
    mech("synapse rows accumulated", int'(rows_done));
    mech("zero-weight filler lanes", n_zero_lanes);
    for (int k = 0; k < NWIN; k++) mech($sformatf("delay window %0d activated", k), win_seen[k]);
    mech("horizon rows reused (t >= H)", (STEPS > H) ? 1 : 0);
    mech("thalamic stream wait", n_thal_wait);
    if (!FULL) begin
      mech("to_transfer channel full", n_full_seen);
      mech("neuron queue overflow", int'(overflows));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
