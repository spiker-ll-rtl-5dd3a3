// lif_neuron: one multiplier-free leaky integrate-and-fire neuron.
//
// Implements the discrete-time LIF model
//   V[n] = beta*V[n-1] + sum_j W_j*s_in,j[n] - Vth*s_out[n-1],
//   s_out[n] = (V[n] > Vth).
// The layer control unit broadcasts one command per cycle (neuron_cmd_e):
// CLEAR at the start of a sample, LEAK once at the start of every timestep,
// ACC for each streamed input channel, FIRE once at the end of the
// timestep. The small command decoder is the neuron's control unit; the
// adder, shifter and comparator are its datapath.
//
// Following the paper: the LIF equation, the subtractive reset of Eq. (1),
// the configurable reset mechanism, multiplier-free operation and the
// 16-bit fixed-point format. Own choices: beta is restricted to
// 1 - 2^-beta_shift (0.875 -> 3, 0.5 -> 1), so the leak is a shift and a
// subtraction; every addition saturates to NB bits; beta_shift = 0 means
// no leak (beta = 1).
//
// Timing: every command takes effect at the next rising clock edge; spike
// holds s_out of the last FIRE until the next FIRE or CLEAR.
module lif_neuron
  import spiker_pkg::*;
#(
  parameter int unsigned NB = NB_DEF,  // membrane potential width
  parameter int unsigned WB = WB_DEF   // weight width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  neuron_cmd_e          cmd,
  input  logic                 in_spike,    // streamed pre-synaptic spike (ACC)
  input  logic signed [WB-1:0] weight,      // weight of that synapse
  input  logic        [NB-1:0] vth,         // threshold (positive)
  input  logic        [3:0]    beta_shift,  // beta = 1 - 2^-beta_shift
  input  reset_mode_e          rst_mode,
  output logic                 spike,       // s_out of the current timestep
  output logic signed [NB-1:0] v_mem
);

  logic signed [31:0] v_ext, w_ext, th_ext, leak, v_next;

  always_comb begin
    v_ext  = 32'(v_mem);
    w_ext  = 32'(weight);
    th_ext = $signed({16'd0, 16'(vth)});
    leak   = (beta_shift == 4'd0) ? 32'sd0 : (v_ext >>> beta_shift);
    v_next = v_ext;
    unique case (cmd)
      NC_CLEAR: v_next = 32'sd0;
      NC_LEAK: begin
        if (spike && rst_mode == RST_ZERO) v_next = 32'sd0;
        else v_next = sat_signed(v_ext - leak - (spike ? th_ext : 32'sd0), NB);
      end
      NC_ACC:  if (in_spike) v_next = sat_signed(v_ext + w_ext, NB);
      default: v_next = v_ext;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_mem <= '0;
      spike <= 1'b0;
    end else begin
      v_mem <= NB'(v_next);
      if (cmd == NC_CLEAR)     spike <= 1'b0;
      else if (cmd == NC_FIRE) spike <= (v_ext > th_ext);
    end
  end

endmodule
