// neuron_queue: queue of spiking neurons tagged with a relative timestamp.
//
// Holds the indices of neurons that spiked during the last D_MAX steps. Entries
// are written in time order into a circular buffer of QDEPTH words; for each of
// the D_MAX relative timestamps (slots, rt = t mod D_MAX) the queue keeps where
// its entries start and how many there are. Opening slot s (open_slot) evicts the
// entries that slot held D_MAX steps ago and starts an empty list at the tail;
// enq appends an index to the open slot. If all QDEPTH words are live, an enqueue
// is dropped and counted in overflows. Reads are random access and same-cycle:
// slot_head/slot_cnt for rd_slot, rd_data for entry rd_idx.
//
// The paper sizes the queue at 4096 indices for a mean of 23 spikes per step and
// D_MAX = 64, noting that overflow is then very unlikely; the slot bookkeeping and
// the drop-on-overflow behaviour are this design's choice.
//
// Lint note: rst_n is reported as used both synchronously and asynchronously; the
// only "synchronous" use is the disable-iff clause of the assertions, not logic.
module neuron_queue #(
  parameter int QDEPTH = 4096,
  parameter int D_MAX  = 64,
  parameter int IW     = 17,
  localparam int QW    = $clog2(QDEPTH),
  localparam int SW    = $clog2(D_MAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          open_slot,
  input  logic [SW-1:0] open_idx,
  input  logic          enq,
  input  logic [IW-1:0] enq_data,
  input  logic [SW-1:0] rd_slot,
  output logic [QW-1:0] slot_head,
  output logic [QW:0]   slot_cnt,
  input  logic [QW-1:0] rd_idx,
  output logic [IW-1:0] rd_data,
  output logic [QW:0]   occupancy,
  output logic [31:0]   overflows
);

  logic [IW-1:0] mem [QDEPTH];
  logic [QW-1:0] head [D_MAX];
  logic [QW:0]   cnt  [D_MAX];
  logic [QW-1:0] tail;
  logic [SW-1:0] cur;
  logic          enq_ok;

  assign slot_head = head[rd_slot];
  assign slot_cnt  = cnt[rd_slot];
  assign rd_data   = mem[rd_idx];
  assign enq_ok    = enq && !open_slot && (occupancy != (QW+1)'(QDEPTH));

  always_ff @(posedge clk) begin
    if (enq_ok) mem[tail] <= enq_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < D_MAX; s++) begin head[s] <= '0; cnt[s] <= '0; end
      tail      <= '0;
      cur       <= '0;
      occupancy <= '0;
      overflows <= '0;
    end else if (open_slot) begin
      occupancy      <= occupancy - cnt[open_idx];
      head[open_idx] <= tail;
      cnt[open_idx]  <= '0;
      cur            <= open_idx;
    end else if (enq) begin
      if (enq_ok) begin
        tail      <= tail + 1'b1;
        cnt[cur]  <= cnt[cur] + 1'b1;
        occupancy <= occupancy + 1'b1;
      end else begin
        overflows <= overflows + 1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(open_slot && enq));

endmodule
