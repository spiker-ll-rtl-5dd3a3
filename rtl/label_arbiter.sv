// label_arbiter: source of the desired output spikes s_d(t).
//
// In supervised mode the desired pattern is derived from the class label:
// the labelled output neuron should fire at every timestep and all others
// should stay silent. In external mode the vector ext_sd supplied with
// each timestep's input (by a reward circuit, heuristic or sensor) is
// used as is. Either way the learning engines only see one bit per
// output neuron.
//
// Following the paper: a per-output-neuron feedback bit derived from the
// label in supervised runs, or produced by an external arbiter. Own
// choice: the one-hot "label neuron always fires" target.
//
// Timing: label_load captures the label (start of a sample), ext_load
// captures ext_sd (each accepted timestep input); s_d is registered.
module label_arbiter #(
  parameter int unsigned N_OUT = 10,
  parameter int unsigned KW    = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ext_mode,
  input  logic             label_load,
  input  logic [KW-1:0]    label,
  input  logic             ext_load,
  input  logic [N_OUT-1:0] ext_sd,
  output logic [N_OUT-1:0] s_d
);

  logic [KW-1:0]    label_q;
  logic [N_OUT-1:0] ext_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      label_q <= '0;
      ext_q   <= '0;
    end else begin
      if (label_load) label_q <= label;
      if (ext_load)   ext_q   <= ext_sd;
    end
  end

  always_comb begin
    s_d = '0;
    if (ext_mode) s_d = ext_q;
    else if (32'(label_q) < N_OUT) s_d[label_q] = 1'b1;
  end

endmodule
