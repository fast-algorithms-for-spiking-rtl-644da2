// fp32_mul: combinational IEEE 754 single-precision multiplier.
//
// Used by the neuron update for the decay and scaling products (p22*u, p21*i,
// p11*i, T*wpsn). The 24x24-bit significand product is normalised by at most one
// position and rounded to nearest, ties to even. This design's choices where the
// paper only says "single precision": subnormal inputs and results are flushed to
// zero, an infinite or NaN input gives a signed infinity, and overflow saturates to
// infinity. The neuron model never produces subnormals, NaNs or infinities in
// normal operation.
//
// Interface: a, b in, y = a*b out, no clock; latency zero.
module fp32_mul
  import snn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sign;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic signed [10:0] exp_s;
  logic [23:0] mant;
  logic        guard, sticky;
  logic [23:0] mant_r;

  always_comb begin
    sign  = a[31] ^ b[31];
    ea    = a[30:23];
    eb    = b[30:23];
    prod  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    exp_s = $signed({3'b0, ea}) + $signed({3'b0, eb}) - 11'sd127;
    if (prod[47]) begin
      mant   = {1'b0, prod[46:24]};
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_s  = exp_s + 11'sd1;
    end else begin
      mant   = {1'b0, prod[45:23]};
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    mant_r = mant + 24'(guard && (sticky || mant[0]));
    if (mant_r[23]) begin
      exp_s  = exp_s + 11'sd1;
      mant_r = '0;
    end
    if (ea == 8'd255 || eb == 8'd255)  y = {sign, 8'hff, 23'd0};
    else if (ea == 8'd0 || eb == 8'd0) y = {sign, 31'd0};
    else if (exp_s >= 11'sd255)        y = {sign, 8'hff, 23'd0};
    else if (exp_s <= 11'sd0)          y = {sign, 31'd0};
    else                               y = {sign, exp_s[7:0], mant_r[22:0]};
  end

endmodule
