// tb_fp32_mul: self-checking test of fp32_mul against double-precision reference
// arithmetic rounded to single (fp_ref_pkg). Covers random operands of both signs
// over a wide exponent range, operands with equal and nearby exponents
// (cancellation), zeros and exact-integer cases used by the neuron model.
module tb_fp32_mul;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] ta, logic [31:0] tb_);
    a = ta; b = tb_;
    #1;
    exp_y = fmul(ta, tb_);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h mul %h: got %h expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x;
    check(32'h0, 32'h3f800000);
    check(32'h3f800000, 32'h0);
    check(32'h41700000, 32'hc1700000);
    check(32'h3f800000, 32'h3f800000);
    check(32'h42af9df3, 32'h40000000);
    for (int k = 0; k < 3000; k++) check(rnd_fp(90, 160), rnd_fp(90, 160));
    for (int k = 0; k < 3000; k++) begin
      x = rnd_fp(120, 135);
      check(x, {~x[31], x[30:23] - 8'($urandom % 3), 23'($urandom)});
    end
    for (int k = 0; k < 1000; k++) begin
      x = rnd_fp(120, 135);
      check(x, {~x[31], x[30:0] ^ 31'($urandom % 4)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
