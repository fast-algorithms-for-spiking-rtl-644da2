// tb_snn_top_full: the simulator at its default size (77,169 neurons, UW = 32,
// SC = 32, H = 16, D_MAX = 64, 4096-entry queue) through a complete run of 60
// time steps, including the initial clearing of the horizon buffer, against the
// reference model. A sparse random network and a small fraction of neurons started
// near threshold keep the spike count near the paper's tens per step.
module tb_snn_top_full;
  snn_tb_env #(.FULL(1), .N(77169), .UW(32), .SC(32), .H(16), .D_MAX(64), .QDEPTH(4096),
               .UPD_DEPTH(16), .SPK_DEPTH(512), .STEPS(60), .MAXR(2), .ROW_PCT(30),
               .NEAR_PM(15), .TMOD(2), .MAX_CYCLES(5000000)) env ();
endmodule
