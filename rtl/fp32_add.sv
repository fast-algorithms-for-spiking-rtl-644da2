// fp32_add: combinational IEEE 754 single-precision adder.
//
// Used by the neuron update (current and potential sums) and by the horizon buffer
// read-modify-write W += w. The operand of larger magnitude is kept, the other is
// aligned with guard, round and sticky bits, the sum or difference is renormalised
// and rounded to nearest, ties to even. This design's choices where the paper only
// says "single precision": subnormals are flushed to zero, an infinite or NaN input
// is passed through as infinity, overflow saturates to infinity, and an exact zero
// difference is +0.
//
// Interface: a, b in, y = a+b out, no clock; latency zero.
module fp32_add
  import snn_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  fp32_t       lrg, sml;
  logic [7:0]  diff;
  logic [26:0] mb, ms, ms_sh;   // 1.23 significand followed by guard, round, sticky
  logic [27:0] sum;
  logic signed [9:0] exp_s;
  int          lz;
  logic        is_zero;
  logic [24:0] mant_r;
  logic        g, rs;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin lrg = a; sml = b; end
    else                    begin lrg = b; sml = a; end
    diff  = lrg[30:23] - sml[30:23];
    mb    = {1'b1, lrg[22:0], 3'b000};
    ms    = {1'b1, sml[22:0], 3'b000};
    if (diff >= 8'd27) ms_sh = 27'd1;
    else begin
      ms_sh = ms >> diff;
      for (int k = 0; k < 27; k++) if (k < int'(diff) && ms[k]) ms_sh[0] = 1'b1;
    end
    exp_s = $signed({2'b0, lrg[30:23]});
    lz    = 0;
    if (lrg[31] == sml[31]) sum = {1'b0, mb} + {1'b0, ms_sh};
    else                      sum = {1'b0, mb} - {1'b0, ms_sh};
    is_zero = (sum == '0);
    if (sum[27]) begin
      sum   = {1'b0, sum[27:2], sum[1] | sum[0]};
      exp_s = exp_s + 10'sd1;
    end else begin
      for (int k = 26; k >= 0; k--) if (sum[k] && lz == 0) lz = 27 - k;
      // lz is now one more than the leading-zero count (0 means sum == 0)
      if (lz > 1) begin
        sum   = sum << (lz - 1);
        exp_s = exp_s - 10'(lz - 1);
      end
    end
    g      = sum[2];
    rs     = sum[1] | sum[0];
    mant_r = {1'b0, sum[26:3]} + 25'(g && (rs || sum[3]));
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_s  = exp_s + 10'sd1;
    end
    if (lrg[30:23] == 8'hff)                         y = {lrg[31], 8'hff, 23'd0};
    else if (sml[30:23] == 8'h00)                  y = (lrg[30:23] == 8'h00) ? 32'd0 : lrg;
    else if (is_zero)                                y = 32'd0;
    else if (exp_s >= 10'sd255)                      y = {lrg[31], 8'hff, 23'd0};
    else if (exp_s <= 10'sd0)                        y = {lrg[31], 31'd0};
    else                                             y = {lrg[31], exp_s[7:0], mant_r[22:0]};
  end

endmodule
