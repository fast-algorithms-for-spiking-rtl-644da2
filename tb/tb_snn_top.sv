// tb_snn_top: end-to-end test of the simulator at reduced size (200 neurons, update
// width 4, 8 synapse classes, horizon 4, 16-step delay range, a 16-entry neuron
// queue and shallow channels so that back-pressure and queue overflow occur). Runs
// 40 time steps and checks every spike and the final state against a reference
// model; see snn_tb_env.
module tb_snn_top;
  snn_tb_env #(.FULL(0), .QDEPTH(16), .NEAR_PM(500), .WSCALE(3000)) env ();
endmodule
