// channel_fifo: blocking first-in first-out channel between the two kernels.
//
// Models the inter-kernel channel of the multi-kernel simulator: the writer blocks
// while the FIFO is full and the reader while it is empty. Valid/ready handshake
// on both sides: a word moves when valid and ready are both high at a clock edge.
// Storage is a circular buffer of DEPTH words (DEPTH a power of two); a word
// written in one cycle can be read in the next. Depth and width are parameters;
// the paper gives neither for its channels, so the defaults are this design's.
//
// Lint note: rst_n is reported as used both synchronously and asynchronously; the
// only "synchronous" use is the disable-iff clause of the assertions, not logic.
module channel_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  count
);

  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
      count <= count + (AW+1)'(in_valid && in_ready) - (AW+1)'(out_valid && out_ready);
    end
  end

  // A word is never written into a full channel nor read from an empty one.
  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  initial assert (DEPTH == (1 << AW)) else $error("DEPTH must be a power of two");

endmodule
