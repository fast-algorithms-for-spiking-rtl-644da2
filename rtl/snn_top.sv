// snn_top: horizon-based, multi-kernel, single-precision simulator of a network of
// leaky integrate-and-fire neurons (defaults: the 77,169-neuron cortical
// microcircuit, update width UW = 32, horizon H = 16, synapse classes SC = 32,
// maximum delay D_MAX = 64 steps).
//
// Two kernels run concurrently and talk only through two blocking channels:
//   neuron_update  -- sweeps the neuron state, UW neurons per cycle, and sends the
//                     indices of spiking neurons (then DONE) on to_transfer;
//   spike_transfer -- drains the horizon buffer row of the step to the update
//                     kernel over to_update, then activates the synapses of queued
//                     neurons, then queues the new spikes.
// The update of step t overlaps the transfer phase of step t; the next step starts
// when the transfer kernel sends the next horizon row.
//
// Off-chip memory is outside this module: the thalamic spike counts arrive as a
// stream (thal_*), the synapse index and synapse rows through two in-order read
// ports (idx_*, syn_*). The host writes the initial neuron state through init_*
// and starts a run of n_steps steps with a one-cycle start pulse; busy falls when
// both kernels have finished. spike_* reports every spike with its step.
//
// Follows the paper's two-kernel structure and channels. The channel depths are
// this design's choice (the paper gives none for these channels).
//
// Statistics outputs: update_stall_cycles (cycles the update sweep waited to send
// spike indices), rows_done (synapse rows activated), queue_overflows and
// queue_occupancy (neuron queue), to_transfer_full (the spike channel is at
// capacity) and to_update_level (words waiting in the current channel).
//
// Lint note: rst_n is reported as used both synchronously and asynchronously.
// The asynchronous use is the flops' reset; the "synchronous" use is only the
// disable-iff clause of the handshake assertions, which are not logic.
module snn_top
  import snn_pkg::*;
#(
  parameter int N       = N_NEURONS_MC,
  parameter int UW      = 32,
  parameter int SC      = 32,
  parameter int H       = 16,
  parameter int D_MAX   = 64,
  parameter int QDEPTH  = 4096,
  parameter int UPD_DEPTH = 16,
  parameter int SPK_DEPTH = 512,
  localparam int ROWS   = (N + UW - 1) / UW,
  localparam int AW     = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int IW     = $clog2(N),
  localparam int QW     = $clog2(QDEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [31:0]            n_steps,
  output logic                   busy,
  input  logic                   init_we,
  input  logic [AW-1:0]          init_addr,
  input  neuron_state_t [UW-1:0] init_data,
  input  logic                   thal_valid,
  output logic                   thal_ready,
  input  logic [UW-1:0][TCNT_W-1:0] thal_data,
  output logic                   idx_req_valid,
  input  logic                   idx_req_ready,
  output logic [31:0]            idx_req_addr,
  input  logic                   idx_rsp_valid,
  input  logic [63:0]            idx_rsp_data,
  output logic                   syn_req_valid,
  input  logic                   syn_req_ready,
  output logic [31:0]            syn_req_addr,
  input  logic                   syn_rsp_valid,
  input  synapse_t [SC-1:0]      syn_rsp_data,
  output logic                   spike_valid,
  output logic [IW-1:0]          spike_idx,
  output logic [31:0]            spike_step,
  output logic [31:0]            update_stall_cycles,
  output logic [31:0]            rows_done,
  output logic [31:0]            queue_overflows,
  output logic [QW:0]            queue_occupancy,
  output logic                   to_transfer_full,
  output logic [$clog2(UPD_DEPTH):0] to_update_level
);

  logic          upd_busy, xfer_busy;
  // to_update channel
  logic          cu_in_valid, cu_in_ready, cu_out_valid, cu_out_ready;
  fp32_t [UW-1:0] cu_in_data, cu_out_data;
  // to_transfer channel
  logic          sp_in_valid, sp_in_ready, sp_out_valid, sp_out_ready;
  logic [IW:0]   sp_in_data, sp_out_data;
  logic [$clog2(UPD_DEPTH):0] cu_count;
  logic [$clog2(SPK_DEPTH):0] sp_count;

  assign busy             = upd_busy || xfer_busy;
  assign to_transfer_full = (sp_count == ($clog2(SPK_DEPTH) + 1)'(SPK_DEPTH));
  assign to_update_level  = cu_count;

  neuron_update #(.N(N), .UW(UW)) u_update (
    .clk, .rst_n, .start, .n_steps, .busy(upd_busy),
    .init_we, .init_addr, .init_data,
    .cur_valid (cu_out_valid), .cur_ready(cu_out_ready), .cur_data(cu_out_data),
    .thal_valid, .thal_ready, .thal_data,
    .spk_valid (sp_in_valid), .spk_ready(sp_in_ready), .spk_data(sp_in_data),
    .spike_valid, .spike_idx, .spike_step,
    .stall_cycles (update_stall_cycles)
  );

  channel_fifo #(.W(UW * 32), .DEPTH(UPD_DEPTH)) u_to_update (
    .clk, .rst_n,
    .in_valid (cu_in_valid), .in_ready(cu_in_ready), .in_data(cu_in_data),
    .out_valid(cu_out_valid), .out_ready(cu_out_ready), .out_data(cu_out_data),
    .count (cu_count)
  );

  channel_fifo #(.W(IW + 1), .DEPTH(SPK_DEPTH)) u_to_transfer (
    .clk, .rst_n,
    .in_valid (sp_in_valid), .in_ready(sp_in_ready), .in_data(sp_in_data),
    .out_valid(sp_out_valid), .out_ready(sp_out_ready), .out_data(sp_out_data),
    .count (sp_count)
  );

  spike_transfer #(.N(N), .UW(UW), .SC(SC), .H(H), .D_MAX(D_MAX), .QDEPTH(QDEPTH))
  u_transfer (
    .clk, .rst_n, .start, .n_steps, .busy(xfer_busy),
    .cur_valid (cu_in_valid), .cur_ready(cu_in_ready), .cur_data(cu_in_data),
    .spk_valid (sp_out_valid), .spk_ready(sp_out_ready), .spk_data(sp_out_data),
    .idx_req_valid, .idx_req_ready, .idx_req_addr, .idx_rsp_valid, .idx_rsp_data,
    .syn_req_valid, .syn_req_ready, .syn_req_addr, .syn_rsp_valid, .syn_rsp_data,
    .rows_done, .queue_overflows, .queue_occupancy
  );

endmodule
