// neuron_update: the update kernel of the horizon-based multi-kernel simulator.
//
// Each time step makes two sweeps over the N neurons, UW neighbouring neurons (one
// row of the neuron state memory) per cycle:
//   1. Collect: one beat of UW currents from the to_update channel (the horizon
//      buffer row the transfer kernel drains for this step) is added to the rows'
//      presynaptic currents, i += w.
//   2. Update: one beat of UW thalamic spike counts (streamed from off-chip memory)
//      is taken and the UW neurons are advanced one step by replicated lif_lane
//      datapaths. The indices of neurons that spiked are sent, one per cycle, to
//      the to_transfer channel; while a row's spikes are being sent the sweep
//      stalls. After the last row a DONE word ({1'b1, index 0}) closes the step.
// Because all currents of a step are collected before any spike is sent, the
// transfer kernel never waits on to_update while the update kernel waits on a
// full to_transfer channel, whatever the number of spikes per step.
//
// Timing: the state memory has a one-cycle read; the kernel reads row k+1 in the
// cycle it writes row k, so each sweep sustains one row (UW neurons) per cycle
// while its input stream is valid. A step takes 2*ceil(N/UW) + spikes + 3 cycles
// plus input stalls.
//
// Interface: start (one-cycle pulse) runs n_steps steps; busy is high until the
// last DONE is sent. The host writes initial neuron state through init_* while
// the kernel is idle. Streams use valid/ready. spike_* reports every spike with
// its step number. Lanes past N in the last row are padding and never spike.
//
// Follows the paper's two-kernel listing: a first loop adds the currents read from
// to_update, a second updates the neurons and sends the spiking indices, then DONE.
// This design's choices: the one-index-per-cycle spike sender with its stall and
// the flag-bit DONE encoding.
module neuron_update
  import snn_pkg::*;
#(
  parameter int N  = N_NEURONS_MC,
  parameter int UW = 32,
  localparam int ROWS = (N + UW - 1) / UW,
  localparam int AW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int IW   = $clog2(N),
  localparam int LW   = (UW > 1) ? $clog2(UW) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [31:0]            n_steps,
  output logic                   busy,
  // host initialisation of the neuron state memory
  input  logic                   init_we,
  input  logic [AW-1:0]          init_addr,
  input  neuron_state_t [UW-1:0] init_data,
  // to_update channel: presynaptic current for UW neurons
  input  logic                   cur_valid,
  output logic                   cur_ready,
  input  fp32_t [UW-1:0]         cur_data,
  // thalamic spike counts for UW neurons
  input  logic                   thal_valid,
  output logic                   thal_ready,
  input  logic [UW-1:0][TCNT_W-1:0] thal_data,
  // to_transfer channel: {done, neuron index}
  output logic                   spk_valid,
  input  logic                   spk_ready,
  output logic [IW:0]            spk_data,
  // spike monitor and statistics
  output logic                   spike_valid,
  output logic [IW-1:0]          spike_idx,
  output logic [31:0]            spike_step,
  output logic [31:0]            stall_cycles
);

  typedef enum logic [2:0] {S_IDLE, S_PRIME, S_COLLECT, S_UPDATE, S_EMIT, S_DONE} state_e;
  state_e state;

  logic [AW-1:0]  k, emit_row;
  logic [31:0]    t, steps;
  logic [UW-1:0]  mask, spikes, lane_ok;
  logic           last_row, fire, fire_c, fire_u, to_update_next;
  neuron_state_t [UW-1:0] rd_data, new_st, col_st, wb_st;
  logic [LW-1:0]  low;

  neuron_state_ram #(.N(N), .UW(UW)) u_ram (
    .clk,
    .rd_en   (1'b1),
    .rd_addr (fire ? (last_row ? '0 : k + 1'b1) : k),
    .rd_data (rd_data),
    .wr_en   (fire || (state == S_IDLE && init_we)),
    .wr_addr (fire ? k : init_addr),
    .wr_data (fire ? wb_st : init_data)
  );

  for (genvar l = 0; l < UW; l++) begin : g_lane
    fp32_t i_sum;
    fp32_add u_collect (.a(rd_data[l].i), .b(cur_data[l]), .y(i_sum));
    always_comb begin
      col_st[l]   = rd_data[l];
      col_st[l].i = i_sum;
    end
    lif_lane u_lane (
      .st_in  (rd_data[l]),
      .tcnt   (thal_data[l]),
      .st_out (new_st[l]),
      .spike  (spikes[l])
    );
    assign lane_ok[l] = (32'(k) * 32'(UW) + 32'(l)) < 32'(N);
  end

  assign last_row   = (k == AW'(ROWS - 1));
  assign fire_c     = (state == S_COLLECT) && cur_valid;
  assign fire_u     = (state == S_UPDATE) && thal_valid;
  assign fire       = fire_c || fire_u;
  assign wb_st      = fire_c ? col_st : new_st;
  assign cur_ready  = fire_c;
  assign thal_ready = fire_u;
  assign busy       = (state != S_IDLE);

  // lowest pending spike lane
  always_comb begin
    low = '0;
    for (int l = UW - 1; l >= 0; l--) if (mask[l]) low = LW'(l);
  end

  assign spk_valid   = (state == S_EMIT) || (state == S_DONE);
  assign spk_data    = (state == S_DONE) ? {1'b1, IW'(0)}
                                         : {1'b0, IW'(32'(emit_row) * 32'(UW) + 32'(low))};
  assign spike_valid = (state == S_EMIT) && spk_ready;
  assign spike_idx   = spk_data[IW-1:0];
  assign spike_step  = t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      to_update_next <= 1'b0;
      k              <= '0;
      emit_row       <= '0;
      t              <= '0;
      steps          <= '0;
      mask           <= '0;
      stall_cycles   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start && n_steps != 0) begin
          state          <= S_PRIME;
          to_update_next <= 1'b0;
          steps          <= n_steps;
          t              <= '0;
          k              <= '0;
        end
        // row 0 is being read; enter the next sweep
        S_PRIME: state <= to_update_next ? S_UPDATE : S_COLLECT;
        S_COLLECT: if (fire_c) begin
          k <= last_row ? '0 : k + 1'b1;
          if (last_row) begin
            state          <= S_PRIME;
            to_update_next <= 1'b1;
          end
        end
        S_UPDATE: if (fire_u) begin
          mask     <= spikes & lane_ok;
          emit_row <= k;
          k        <= last_row ? '0 : k + 1'b1;
          if ((spikes & lane_ok) != '0) state <= S_EMIT;
          else if (last_row)            state <= S_DONE;
        end
        S_EMIT: begin
          stall_cycles <= stall_cycles + 1;
          if (spk_ready) begin
            mask[low] <= 1'b0;
            if ((mask & (mask - 1'b1)) == '0) state <= (k == '0) ? S_DONE : S_UPDATE;
          end
        end
        S_DONE: if (spk_ready) begin
          t              <= t + 1;
          to_update_next <= 1'b0;
          state          <= (t + 1 == steps) ? S_IDLE : S_PRIME;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
