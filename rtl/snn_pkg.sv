// snn_pkg: types and constants shared by the horizon-based spiking neural network
// simulator (update kernel, transfer kernel and their memories).
//
// Neuron state is IEEE 754 single precision. Potentials are kept relative to the
// resting potential (u_rest = u_reset = 0 mV), so the firing threshold of -50 mV
// becomes +15 mV. The decay and scaling constants follow the exact-integration
// recurrences of the leaky integrate-and-fire model with exponential synaptic
// current, for dt = 0.1 ms, tau_m = 10 ms, tau_syn = 0.5 ms, C_m = 250 pF:
//   P11  = exp(-dt/tau_syn)                                  ~ 0.8187
//   P22  = exp(-dt/tau_m)                                    ~ 0.9900
//   P21  = P11 * beta/C_m * (exp(dt/beta) - 1),
//          beta = tau_syn*tau_m/(tau_m - tau_syn)            ~ 0.00036
//   WPSN = w_f * 0.15 mV, w_f = C_m*d / (p*(q^(tau_m/d) - q^(tau_syn/d))),
//          d = tau_syn - tau_m, p = tau_syn*tau_m, q = tau_m/tau_syn  ~ 87.81
// The hex values are these numbers rounded to single precision.
// The synapse record is eight bytes: a 32-bit weight, a 24-bit destination field
// (17 bits used) and an 8-bit delay field (6 bits used), as the paper lays it out.
package snn_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO   = 32'h0000_0000;
  localparam fp32_t FP_P11    = 32'h3f51_9857;
  localparam fp32_t FP_P21    = 32'h39bd_188b;
  localparam fp32_t FP_P22    = 32'h3f7d_73e8;
  localparam fp32_t FP_U_THR  = 32'h4170_0000;  // 15.0 mV above rest
  localparam fp32_t FP_WPSN   = 32'h42af_9df3;  // thalamic spike current, w_f * 0.15

  localparam int N_NEURONS_MC = 77169;  // neurons of the full microcircuit
  localparam int TREF_TICS    = 20;     // 2 ms refractory period at 0.1 ms steps
  localparam int R_W          = 8;      // refractory counter width
  localparam int TCNT_W       = 8;      // thalamic spike count per neuron and step

  typedef struct packed {
    fp32_t          u;  // membrane potential relative to rest (mV)
    fp32_t          i;  // presynaptic current
    logic [R_W-1:0] r;  // remaining refractory steps
  } neuron_state_t;

  typedef struct packed {
    fp32_t       w;  // synaptic current
    logic [23:0] j;  // destination neuron
    logic [7:0]  d;  // delay in time steps, modulo 64
  } synapse_t;

  // a >= b for finite single-precision numbers (+0 and -0 compare equal).
  function automatic logic fp_ge(fp32_t a, fp32_t b);
    logic a_zero, b_zero;
    a_zero = (a[30:0] == '0);
    b_zero = (b[30:0] == '0);
    if (a_zero && b_zero)        return 1'b1;
    if (a[31] != b[31])          return !a[31];
    if (!a[31])                  return a[30:0] >= b[30:0];
    return a[30:0] <= b[30:0];
  endfunction

  // Unsigned 8-bit integer to single precision (exact).
  function automatic fp32_t u8_to_fp(logic [7:0] v);
    fp32_t r;
    int    msb;
    logic [22:0] tmp;
    r   = '0;
    msb = -1;
    for (int k = 0; k < 8; k++) if (v[k]) msb = k;
    if (msb >= 0) begin
      tmp = 23'(32'(v) << (23 - msb));
      r = {1'b0, 8'(127 + msb), tmp};
    end
    return r;
  endfunction

endpackage
