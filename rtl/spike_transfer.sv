// spike_transfer: the transfer kernel of the horizon-based multi-kernel simulator.
//
// Owns the horizon buffer W (H rows of N currents, SC banks) and the neuron queue.
// One time step t runs three phases:
//   1. Sync: W row t mod H is streamed to the update kernel over to_update, UW
//      currents per beat, and cleared as it is read.
//   2. Transfer: for each window i = 0 .. D_MAX/H-1, every neuron queued at
//      relative timestamp rt = (t - H*i - 1) mod D_MAX activates its synapses with
//      delays H*i+1 .. H*i+H. Two offsets from the synapse index (window start and
//      end, in rows of SC synapses) bound a contiguous, interleaved run of synapse
//      rows; lane c of every row holds a synapse whose destination j satisfies
//      j mod SC = c (or a zero-weight filler), so the SC lanes add their weights
//      into W[(d + t) mod H][j] in their own banks, all in one cycle.
//   3. Receive: indices of the neurons that spiked in step t arrive over
//      to_transfer and are queued under rt = t mod D_MAX until the DONE word.
// Before the first step the whole buffer is cleared, SC words per cycle.
//
// Timing: phase 1 takes ceil(N/UW) beats; in phase 2 synapse rows are requested
// back to back and each response row is accumulated in the cycle it arrives, so a
// queued neuron costs one index round trip plus its rows plus the memory latency;
// phase 3 takes one cycle per spike plus two.
//
// Interface: start (pulse) runs n_steps steps; busy stays high until the last
// step's spikes are queued. Index reads (idx_req_addr = neuron*(D_MAX/H) + window)
// return {end, start} row offsets; synapse reads return one row of SC synapse
// records. Both are in-order request/response ports to off-chip memory; responses
// are always accepted.
//
// Follows the paper: the three phases, the window arithmetic, the index lookup,
// interleaved disjoint synapse classes and the queue. This design's choices: the
// window-granular index, the port handshakes, one neuron's synapses in flight at a
// time, the single-cycle read-modify-write and the initial clearing pass.
//
// Lint note: rst_n is reported as used both synchronously and asynchronously; the
// only "synchronous" use is the disable-iff clause of the assertions, not logic.
// At the default size the top bits of idx_req_addr are constant zero: the index
// is addressed by neuron*(D_MAX/H) + window, which needs 19 of its 32 bits.
module spike_transfer
  import snn_pkg::*;
#(
  parameter int N      = N_NEURONS_MC,
  parameter int UW     = 32,
  parameter int SC     = 32,
  parameter int H      = 16,
  parameter int D_MAX  = 64,
  parameter int QDEPTH = 4096,
  localparam int IW    = $clog2(N),
  localparam int NWIN  = D_MAX / H,
  localparam int UROWS = (N + UW - 1) / UW,
  localparam int BROWS = (N + SC - 1) / SC,
  localparam int BW    = $clog2(H * BROWS),
  localparam int QW    = $clog2(QDEPTH),
  localparam int SW    = $clog2(D_MAX)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [31:0]         n_steps,
  output logic                busy,
  // to_update channel
  output logic                cur_valid,
  input  logic                cur_ready,
  output fp32_t [UW-1:0]      cur_data,
  // to_transfer channel: {done, neuron index}
  input  logic                spk_valid,
  output logic                spk_ready,
  input  logic [IW:0]         spk_data,
  // synapse index in off-chip memory
  output logic                idx_req_valid,
  input  logic                idx_req_ready,
  output logic [31:0]         idx_req_addr,
  input  logic                idx_rsp_valid,
  input  logic [63:0]         idx_rsp_data,
  // synapse rows in off-chip memory
  output logic                syn_req_valid,
  input  logic                syn_req_ready,
  output logic [31:0]         syn_req_addr,
  input  logic                syn_rsp_valid,
  input  synapse_t [SC-1:0]   syn_rsp_data,
  // statistics
  output logic [31:0]         rows_done,
  output logic [31:0]         queue_overflows,
  output logic [QW:0]         queue_occupancy
);

  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_SYNC, S_WIN, S_ENTRY, S_IDX_REQ, S_IDX_WAIT, S_SYN,
    S_NEXT, S_OPEN, S_RECV
  } state_e;
  state_e state;

  logic [31:0]   t, steps;
  logic [BW-1:0] clr;
  logic [31:0]   beat;
  logic [$clog2(NWIN+1)-1:0] win;
  logic [QW:0]   ent;
  logic [31:0]   o1, req_ptr, rsp_left;
  logic [SW-1:0] rt;

  // horizon buffer ports
  logic [BW-1:0] hb_addr  [SC];
  fp32_t         hb_rdata [SC];
  logic          hb_we    [SC];
  fp32_t         hb_wdata [SC];
  fp32_t         acc      [SC];

  horizon_buffer #(.N(N), .H(H), .SC(SC)) u_hb (
    .clk, .addr(hb_addr), .rdata(hb_rdata), .we(hb_we), .wdata(hb_wdata)
  );

  for (genvar c = 0; c < SC; c++) begin : g_acc
    fp32_add u_acc (.a(hb_rdata[c]), .b(syn_rsp_data[c].w), .y(acc[c]));
  end

  // neuron queue
  logic [QW-1:0] q_head, q_rd_idx;
  logic [QW:0]   q_cnt;
  logic [IW-1:0] q_data;
  logic          q_open, q_enq;

  neuron_queue #(.QDEPTH(QDEPTH), .D_MAX(D_MAX), .IW(IW)) u_q (
    .clk, .rst_n,
    .open_slot (q_open),
    .open_idx  (SW'(t)),
    .enq       (q_enq),
    .enq_data  (spk_data[IW-1:0]),
    .rd_slot   (rt),
    .slot_head (q_head),
    .slot_cnt  (q_cnt),
    .rd_idx    (q_rd_idx),
    .rd_data   (q_data),
    .occupancy (queue_occupancy),
    .overflows (queue_overflows)
  );

  assign rt       = SW'(t - 32'(H) * 32'(win) - 1);
  assign q_rd_idx = q_head + QW'(ent);
  assign q_open   = (state == S_OPEN);
  assign q_enq    = (state == S_RECV) && spk_valid && !spk_data[IW];
  assign spk_ready = (state == S_RECV);
  assign busy     = (state != S_IDLE);

  assign idx_req_valid = (state == S_IDX_REQ);
  assign idx_req_addr  = 32'(q_data) * 32'(NWIN) + 32'(win);
  assign syn_req_valid = (state == S_SYN) && (req_ptr != o1);
  assign syn_req_addr  = req_ptr;

  // bank port multiplexing
  logic [31:0] base_bank, hrow;
  always_comb begin
    hrow      = t % 32'(H);
    base_bank = (beat * 32'(UW)) % 32'(SC);
    cur_valid = (state == S_SYNC);
    for (int l = 0; l < UW; l++) cur_data[l] = hb_rdata[(base_bank + 32'(l)) % 32'(SC)];
    for (int c = 0; c < SC; c++) begin
      hb_addr[c]  = '0;
      hb_we[c]    = 1'b0;
      hb_wdata[c] = FP_ZERO;
      case (state)
        S_CLEAR: begin
          hb_addr[c] = clr;
          hb_we[c]   = 1'b1;
        end
        S_SYNC: begin
          if (32'(c) >= base_bank && 32'(c) < base_bank + 32'(UW)) begin
            // neuron n = beat*UW + (c - base_bank), word n / SC of row t mod H
            hb_addr[c] = BW'(hrow * 32'(BROWS) + (beat * 32'(UW)) / 32'(SC));
            hb_we[c]   = cur_ready;
          end
        end
        default: begin
          if (syn_rsp_valid) begin
            hb_addr[c]  = BW'(((32'(syn_rsp_data[c].d) + t) % 32'(H)) * 32'(BROWS)
                              + 32'(syn_rsp_data[c].j) / 32'(SC));
            hb_we[c]    = 1'b1;
            hb_wdata[c] = acc[c];
          end
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      t         <= '0;
      steps     <= '0;
      clr       <= '0;
      beat      <= '0;
      win       <= '0;
      ent       <= '0;
      o1        <= '0;
      req_ptr   <= '0;
      rsp_left  <= '0;
      rows_done <= '0;
    end else begin
      if (syn_rsp_valid) rows_done <= rows_done + 1;
      case (state)
        S_IDLE: if (start && n_steps != 0) begin
          state <= S_CLEAR;
          steps <= n_steps;
          t     <= '0;
          clr   <= '0;
        end
        S_CLEAR: begin
          clr <= clr + 1'b1;
          if (clr == BW'(H * BROWS - 1)) begin
            state <= S_SYNC;
            beat  <= '0;
          end
        end
        S_SYNC: if (cur_ready) begin
          beat <= beat + 1;
          if (beat == 32'(UROWS - 1)) begin
            state <= S_WIN;
            win   <= '0;
          end
        end
        S_WIN: begin
          ent <= '0;
          if (q_cnt != '0)                 state <= S_ENTRY;
          else if (win == ($bits(win))'(NWIN - 1)) state <= S_OPEN;
          else                             win <= win + 1'b1;
        end
        S_ENTRY: state <= S_IDX_REQ;
        S_IDX_REQ: if (idx_req_ready) state <= S_IDX_WAIT;
        S_IDX_WAIT: if (idx_rsp_valid) begin
          req_ptr  <= idx_rsp_data[31:0];
          o1       <= idx_rsp_data[63:32];
          rsp_left <= idx_rsp_data[63:32] - idx_rsp_data[31:0];
          state    <= (idx_rsp_data[63:32] == idx_rsp_data[31:0]) ? S_NEXT : S_SYN;
        end
        S_SYN: begin
          if (syn_req_valid && syn_req_ready) req_ptr <= req_ptr + 1;
          if (syn_rsp_valid) begin
            rsp_left <= rsp_left - 1;
            if (rsp_left == 1) state <= S_NEXT;
          end
        end
        S_NEXT: begin
          if (ent + 1'b1 == q_cnt) begin
            ent <= '0;
            if (win == ($bits(win))'(NWIN - 1)) state <= S_OPEN;
            else begin win <= win + 1'b1; state <= S_WIN; end
          end else begin
            ent   <= ent + 1'b1;
            state <= S_ENTRY;
          end
        end
        S_OPEN: state <= S_RECV;
        S_RECV: if (spk_valid && spk_data[IW]) begin
          t     <= t + 1;
          beat  <= '0;
          state <= (t + 1 == steps) ? S_IDLE : S_SYNC;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A synapse in lane c belongs to class c; responses only arrive when expected.
  for (genvar c = 0; c < SC; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      syn_rsp_valid |-> (32'(syn_rsp_data[c].j) % 32'(SC)) == 32'(c));
  end
  assert property (@(posedge clk) disable iff (!rst_n) syn_rsp_valid |-> state == S_SYN);
  initial assert (SC % UW == 0 && D_MAX % H == 0)
    else $error("UW must divide SC and H must divide D_MAX");

endmodule
