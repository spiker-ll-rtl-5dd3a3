// tb_spiker_ll_full: end-to-end test of the accelerator at its default
// size, which is the MNIST network (784-200-10, ten timesteps, 16-bit
// weights, beta = 0.875, learning rate 0.026 -> 7 in Q8), with random spike
// data: loads all weights and runs inference and training samples.
// See spiker_ll_tb_body.svh.
module tb_spiker_ll_full;
  import spiker_pkg::*;
  import spiker_ref_pkg::*;
  localparam int NI = N_IN_DEF, NH = N_HID_DEF, NO = N_OUT_DEF, T = T_DEF;
  localparam int N_SAMPLES = 2, BETA_SHIFT = 3, LR = 7;

  `include "spiker_ll_tb_body.svh"

  spiker_ll_top dut (.*);
endmodule
