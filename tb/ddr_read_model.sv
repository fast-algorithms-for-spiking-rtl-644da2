// ddr_read_model: behavioural model of one in-order read port of the off-chip
// DDR4 memory (not synthesizable; for testbenches only).
//
// Accepts a request (req_valid & req_ready) and returns the same address on
// rsp_addr, with rsp_valid high for one cycle, LAT cycles later. Responses come
// back in request order. req_ready is randomly withheld STALL_PCT percent of the
// cycles to model a busy memory controller. The testbench turns rsp_addr into data.
module ddr_read_model #(
  parameter int LAT       = 8,
  parameter int STALL_PCT = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  output logic        rsp_valid,
  output logic [31:0] rsp_addr
);
  logic [31:0] q_addr [$];
  longint      q_time [$];
  longint      now;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= 0;
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_addr  <= '0;
    end else begin
      now <= now + 1;
      if (req_valid && req_ready) begin
        q_addr.push_back(req_addr);
        q_time.push_back(now + LAT);
      end
      req_ready <= (($urandom % 100) >= STALL_PCT);
      if (q_time.size() > 0 && q_time[0] <= now) begin
        rsp_valid <= 1'b1;
        rsp_addr  <= q_addr.pop_front();
        void'(q_time.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end
endmodule
