// tb_lif_lane: checks one neuron's step update against reference single-precision
// arithmetic: random potentials around the threshold, random currents of both
// signs, refractory and non-refractory neurons, thalamic counts 0..15.
module tb_lif_lane;
  import snn_pkg::*;
  import fp_ref_pkg::*;

  neuron_state_t st_in, st_out;
  logic [7:0]    tcnt;
  logic          spike;
  int checks = 0, failures = 0, n_spk = 0, n_ref = 0;

  lif_lane dut (.st_in, .tcnt, .st_out, .spike);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t x, ei;
    logic  es;
    logic [7:0] er;
    fp32_t eu;
    for (int k = 0; k < 4000; k++) begin
      st_in.u = r2f(real'($urandom % 17000) / 1000.0);
      st_in.i = r2f((real'($urandom % 200000) - 100000.0) / 10.0);
      st_in.r = ($urandom % 3 == 0) ? 8'($urandom % 21) : 8'd0;
      tcnt    = 8'($urandom % 16);
      #1;
      x  = fadd(fmul(FP_P22, st_in.u), fmul(FP_P21, st_in.i));
      ei = fadd(fmul(FP_P11, st_in.i), r2f(real'(tcnt) * f2r(FP_WPSN)));
      if (st_in.r == 0) begin
        es = f2r(x) >= 15.0;
        eu = es ? 32'd0 : x;
        er = es ? 8'd20 : 8'd0;
      end else begin
        es = 1'b0; eu = 32'd0; er = st_in.r - 1;
        n_ref++;
      end
      n_spk += int'(es);
      checks++;
      if (spike !== es || st_out.u !== eu || st_out.i !== ei || st_out.r !== er) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH u=%h i=%h r=%0d t=%0d: got %b %h %h %0d exp %b %h %h %0d",
                   st_in.u, st_in.i, st_in.r, tcnt, spike, st_out.u, st_out.i, st_out.r,
                   es, eu, ei, er);
      end
    end
    $display("spikes %0d, refractory cases %0d", n_spk, n_ref);
    checks++;
    if (n_spk == 0 || n_ref == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
