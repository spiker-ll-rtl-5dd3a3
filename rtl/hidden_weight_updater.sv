// hidden_weight_updater: STSF weight updater of one hidden-layer synapse.
//
// Computes the new weight w + g * Phi_i * l for the synapse from input
// channel j to hidden neuron i, where
//   l     = s_pre AND s_post             (vanilla STDP, same timestep)
//   Phi_i = +-c_i if s_d,k(i) != s_o,k(i) (ternary DFA error), else 0.
// The enable of the adder is the AND of l, the error-is-nonzero condition
// and the gating/training enable; SUB is chosen by which of the two
// non-zero error codes ("01" or "10" on {s_d, s_o}) is present, combined
// with the stored sign of c_i.
//
// Following the paper (Fig. 1-B1 and Eqs. 5-11): the AND gate for l, the
// inequality test of s_d and s_o, the "01"/"10" decode driving SUB, the
// stored magnitude c_i, and the ANDing of the enables. Own choice: the
// sign convention. With c_i positive, s_o = 1 and s_d = 0 (a spike that
// should not have happened) depresses the weight and s_o = 0, s_d = 1
// potentiates it, i.e. a descent step on the MSE of Eq. (7); a negative
// c_i (sign = 1) flips the direction. Purely combinational.
module hidden_weight_updater
  import spiker_pkg::*;
#(
  parameter int unsigned WB = WB_DEF
) (
  input  logic                 s_pre,     // input spike of channel j at t
  input  logic                 s_post,    // spike of hidden neuron i at t
  input  logic                 s_d,       // desired spike of output k(i)
  input  logic                 s_o,       // actual spike of output k(i)
  input  logic                 gate,      // g(t) AND training mode
  input  logic        [WB-1:0] c_mag,     // |c_i|
  input  logic                 c_neg,     // sign of c_i (1 = negative)
  input  logic signed [WB-1:0] weight,
  output logic signed [WB-1:0] weight_out,
  output logic                 updated    // the adder was enabled
);

  logic ell, err, over, en, sub;

  always_comb begin
    ell  = s_pre & s_post;           // l(t) = s_pre(t) * s_post(t)
    err  = s_d ^ s_o;                // delta != 0
    over = ({s_d, s_o} == 2'b01);    // "01": fired without being wanted
    en   = ell & err & gate;
    sub  = over ^ c_neg;
  end

  assign updated = en;

  update_adder #(.WB(WB)) u_adder (
    .en        (en),
    .sub       (sub),
    .weight    (weight),
    .mag       (c_mag),
    .weight_out(weight_out)
  );

endmodule
