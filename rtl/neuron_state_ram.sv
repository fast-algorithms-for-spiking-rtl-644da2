// neuron_state_ram: on-chip memory holding every neuron's membrane potential u,
// presynaptic current i and refractory counter r.
//
// Organised as ROWS = ceil(N/UW) words of UW neuron states, so the update kernel
// reads and writes UW neighbouring neurons (one row) per cycle. Neuron n lives in
// row n/UW, lane n%UW. One synchronous read port (data valid the cycle after
// rd_en) and one write port, as a block RAM provides. A read and a write of the
// same row in one cycle return the old contents. The paper places this state in
// on-chip SRAM; the row organisation and the port timing are this design's choice.
module neuron_state_ram
  import snn_pkg::*;
#(
  parameter int N  = N_NEURONS_MC,
  parameter int UW = 32,
  localparam int ROWS = (N + UW - 1) / UW,
  localparam int AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                  clk,
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output neuron_state_t [UW-1:0] rd_data,
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  neuron_state_t [UW-1:0] wr_data
);

  neuron_state_t [UW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (rd_en)  rd_data       <= mem[rd_addr];
    if (wr_en)  mem[wr_addr]  <= wr_data;
  end

endmodule
