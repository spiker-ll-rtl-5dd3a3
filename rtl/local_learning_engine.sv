// local_learning_engine: the learning module of one layer.
//
// Holds one weight updater per neuron of the layer, so a whole weight
// word (all neurons' weights for one input channel) is updated in one
// cycle. For a hidden layer (IS_OUTPUT = 0) it also holds the DFA
// feedback table: for each neuron i the index k(i) of the single output
// neuron it listens to, and the sign and magnitude of its constant c_i;
// a multiplexer per neuron picks s_d,k(i) and s_o,k(i) out of the output
// error vector. For the output layer (IS_OUTPUT = 1) neuron j uses its own
// s_d,j / s_o,j and all updaters share the magnitude eta.
//
// Following the paper: one updater per neuron, one non-zero feedback
// entry per hidden neuron, c_i sign and magnitude kept in a small table,
// and a shared output-layer constant. Own choices: the table is a
// register file written through fb_* and reset to k(i) = i mod N_OUT,
// c_i = +C_DEF.
//
// Timing: weights_out and updated are combinational in weights_in, s_pre,
// s_post and the error vectors; a table write lands at the clock edge.
module local_learning_engine
  import spiker_pkg::*;
#(
  parameter int unsigned N         = N_HID_DEF,  // neurons in the layer
  parameter int unsigned N_OUT     = N_OUT_DEF,  // output neurons (error bits)
  parameter bit          IS_OUTPUT = 1'b0,
  parameter int unsigned WB        = WB_DEF,
  parameter int unsigned C_DEF     = 7,          // reset |c_i| (0.026 in Q8)
  parameter int unsigned IW        = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned KW        = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // spikes and error of the current timestep
  input  logic              s_pre,        // streamed input spike
  input  logic [N-1:0]      s_post,       // spikes of this layer's neurons
  input  logic [N_OUT-1:0]  s_d,          // desired output spikes
  input  logic [N_OUT-1:0]  s_o,          // actual output spikes
  input  logic              gate,         // g(t) AND training pass
  input  logic [WB-1:0]     eta,          // output-layer magnitude
  // weight word read from / written to the layer memory
  input  logic [N*WB-1:0]   weights_in,
  output logic [N*WB-1:0]   weights_out,
  output logic [N-1:0]      updated,
  // feedback table write port (hidden layer)
  input  logic              fb_we,
  input  logic [IW-1:0]     fb_idx,
  input  logic [KW-1:0]     fb_k,
  input  logic              fb_neg,
  input  logic [WB-1:0]     fb_mag
);

  if (IS_OUTPUT) begin : g_out
    initial assert (N == N_OUT) else $error("output layer needs N == N_OUT");

    for (genvar j = 0; j < N; j++) begin : g_wu
      output_weight_updater #(.WB(WB)) u_wu (
        .s_pre     (s_pre),
        .s_d       (s_d[j]),
        .s_o       (s_o[j]),
        .gate      (gate),
        .eta       (eta),
        .weight    (weights_in[j*WB +: WB]),
        .weight_out(weights_out[j*WB +: WB]),
        .updated   (updated[j])
      );
    end
  end else begin : g_hid
    logic [KW-1:0] fb_k_q   [N];
    logic          fb_neg_q [N];
    logic [WB-1:0] fb_mag_q [N];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < N; i++) begin
          fb_k_q[i]   <= KW'(i % N_OUT);
          fb_neg_q[i] <= 1'b0;
          fb_mag_q[i] <= WB'(C_DEF);
        end
      end else if (fb_we && 32'(fb_idx) < N) begin
        fb_k_q[fb_idx]   <= (32'(fb_k) < N_OUT) ? fb_k : '0;
        fb_neg_q[fb_idx] <= fb_neg;
        fb_mag_q[fb_idx] <= fb_mag;
      end
    end

    for (genvar i = 0; i < N; i++) begin : g_wu
      hidden_weight_updater #(.WB(WB)) u_wu (
        .s_pre     (s_pre),
        .s_post    (s_post[i]),
        .s_d       (s_d[fb_k_q[i]]),
        .s_o       (s_o[fb_k_q[i]]),
        .gate      (gate),
        .c_mag     (fb_mag_q[i]),
        .c_neg     (fb_neg_q[i]),
        .weight    (weights_in[i*WB +: WB]),
        .weight_out(weights_out[i*WB +: WB]),
        .updated   (updated[i])
      );
    end
  end

endmodule
