// horizon_buffer: the spike buffer W[H][N] of the horizon algorithm.
//
// W[r][n] accumulates the synaptic current neuron n receives when row r = t mod H
// is drained. The buffer is split into SC banks by the destination's congruence
// class n mod SC, so the SC synapse lanes of the transfer kernel, each carrying
// only synapses whose destination is in its own class, never touch the same bank
// (paper, disjoint synapses). Bank c stores neuron n = c + SC*k of row r at word
// r*BROWS + k, BROWS = ceil(N/SC).
//
// Each bank has one port: an asynchronous (same-cycle) read of word addr[c] and a
// synchronous write of wdata[c] to the same word when we[c] is high. The transfer
// kernel uses it for single-cycle read-modify-write and for read-and-clear. The
// paper gives the buffer's function and banking; the same-cycle read (which lets
// W += w complete in one cycle without forwarding) is this design's choice.
module horizon_buffer
  import snn_pkg::*;
#(
  parameter int N  = N_NEURONS_MC,
  parameter int H  = 16,
  parameter int SC = 32,
  localparam int BROWS = (N + SC - 1) / SC,
  localparam int BW    = $clog2(H * BROWS)
) (
  input  logic               clk,
  input  logic [BW-1:0]      addr  [SC],
  output fp32_t              rdata [SC],
  input  logic               we    [SC],
  input  fp32_t              wdata [SC]
);

  for (genvar c = 0; c < SC; c++) begin : g_bank
    fp32_t mem [H * BROWS];
    assign rdata[c] = mem[addr[c]];
    always_ff @(posedge clk) begin
      if (we[c]) mem[addr[c]] <= wdata[c];
    end
  end

endmodule
