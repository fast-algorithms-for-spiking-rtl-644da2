// lif_lane: one neuron's leaky integrate-and-fire time step.
//
// Combinational datapath that the update kernel replicates UW times. For the neuron
// state (u, i, r) -- whose current i already includes the synaptic current
// delivered for this step -- and the number of thalamic spikes tcnt the neuron
// receives, it computes, in the order of the paper's update listings:
//   if r == 0:  x = p22*u + p21*i;  spike = (x >= u_thr)
//               u' = spike ? 0 : x;  r' = spike ? tref : 0
//   else:       u' = 0;  r' = r - 1;  spike = 0
//   i' = p11*i + tcnt*wpsn
// All arithmetic is single precision (4 multipliers, 2 adders). Constants come from
// snn_pkg and may be overridden as parameters.
//
// Interface: st_in/tcnt in, st_out/spike out; no clock, latency zero.
module lif_lane
  import snn_pkg::*;
#(
  parameter fp32_t P11  = FP_P11,
  parameter fp32_t P21  = FP_P21,
  parameter fp32_t P22  = FP_P22,
  parameter fp32_t UTHR = FP_U_THR,
  parameter fp32_t WPSN = FP_WPSN,
  parameter int    TREF = TREF_TICS
) (
  input  neuron_state_t      st_in,
  input  logic [TCNT_W-1:0]  tcnt,
  output neuron_state_t      st_out,
  output logic               spike
);

  fp32_t i1, pu, pi, x, di, th, i_new;

  assign i1 = st_in.i;
  fp32_mul u_mul_p22 (.a(P22), .b(st_in.u), .y(pu));
  fp32_mul u_mul_p21 (.a(P21), .b(i1),      .y(pi));
  fp32_add u_add_x   (.a(pu),  .b(pi),      .y(x));
  fp32_mul u_mul_p11 (.a(P11), .b(i1),      .y(di));
  fp32_mul u_mul_th  (.a(u8_to_fp(tcnt)), .b(WPSN), .y(th));
  fp32_add u_add_i   (.a(di),  .b(th),      .y(i_new));

  always_comb begin
    st_out.i = i_new;
    spike    = 1'b0;
    if (st_in.r == '0) begin
      spike      = fp_ge(x, UTHR);
      st_out.u   = spike ? FP_ZERO : x;
      st_out.r   = spike ? R_W'(TREF) : '0;
    end else begin
      st_out.u   = FP_ZERO;
      st_out.r   = st_in.r - 1'b1;
    end
  end

endmodule
