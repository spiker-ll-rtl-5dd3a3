// output_weight_updater: weight updater of one output-layer synapse.
//
// Implements Delta w_ij = eta_out * delta_j(t) * s_i(t) (Eq. 12) for the
// synapse from hidden neuron i to output neuron j: the adder is enabled
// when the hidden spike is present, the output error is non-zero
// (s_d,j != s_o,j) and the gating/training enable is high; the "01"/"10"
// decode of {s_d, s_o} selects SUB. No DFA or local STDP term is needed.
//
// Following the paper (Fig. 1-B2): the inequality test, the "01"/"10"
// decode, the AND with s_pre and the single magnitude shared by all
// output synapses (labelled 1/N_O in the figure; it holds the quantised
// eta_out*2/N_O). Own choice: the sign convention, the same as in
// hidden_weight_updater (an unwanted spike depresses). Combinational.
module output_weight_updater
  import spiker_pkg::*;
#(
  parameter int unsigned WB = WB_DEF
) (
  input  logic                 s_pre,     // spike of hidden neuron i at t
  input  logic                 s_d,       // desired spike of output j
  input  logic                 s_o,       // actual spike of output j
  input  logic                 gate,
  input  logic        [WB-1:0] eta,       // shared update magnitude
  input  logic signed [WB-1:0] weight,
  output logic signed [WB-1:0] weight_out,
  output logic                 updated
);

  logic err, over, en;

  always_comb begin
    err  = s_d ^ s_o;
    over = ({s_d, s_o} == 2'b01);
    en   = s_pre & err & gate;
  end

  assign updated = en;

  update_adder #(.WB(WB)) u_adder (
    .en        (en),
    .sub       (over),
    .weight    (weight),
    .mag       (eta),
    .weight_out(weight_out)
  );

endmodule
