// tb_spiker_ll_top: end-to-end test of the accelerator built at the size
// of the DIGITS network (64-60-10, ten timesteps, beta = 0.5, learning
// rate 0.074 -> 19 in Q8), with random spike data.
// See spiker_ll_tb_body.svh for what is checked.
module tb_spiker_ll_top;
  import spiker_pkg::*;
  import spiker_ref_pkg::*;
  localparam int NI = 64, NH = 60, NO = 10, T = 10, N_SAMPLES = 8;
  localparam int BETA_SHIFT = 1, LR = 19;

  `include "spiker_ll_tb_body.svh"

  spiker_ll_top #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .T(T)) dut (.*);
endmodule
