// spiker_pkg: shared constants and types of the Spiker-LL accelerator.
//
// The fixed-point format (16-bit weights and membrane potentials with eight
// fractional bits), the MNIST network shape (784-200-10) and the ten
// timesteps per sample are the figures used for the main evaluation. The
// command encodings, the configuration bus layout and the default learning
// constants are choices of this implementation.
package spiker_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned WB_DEF    = 16;   // weight width
  localparam int unsigned NB_DEF    = 16;   // membrane potential width
  localparam int unsigned FRAC_BITS = 8;    // fractional bits of both
  localparam int unsigned N_IN_DEF  = 784;  // input channels
  localparam int unsigned N_HID_DEF = 200;  // hidden LIF neurons
  localparam int unsigned N_OUT_DEF = 10;   // output LIF neurons
  localparam int unsigned T_DEF     = 10;   // timesteps per sample

  // Threshold 1.0 in the 8-fractional-bit format.
  localparam logic [15:0] VTH_ONE   = 16'(1 << FRAC_BITS);

  // ---------------------------------------------------------------- neuron
  // Commands a layer control unit broadcasts to all neurons of its layer.
  typedef enum logic [2:0] {
    NC_IDLE  = 3'd0,  // hold state
    NC_CLEAR = 3'd1,  // start of a sample: V = 0, s = 0
    NC_LEAK  = 3'd2,  // V = beta*V - Vth*s[n-1] (or reset to zero)
    NC_ACC   = 3'd3,  // V = V + W when the streamed input spike is 1
    NC_FIRE  = 3'd4   // s = (V > Vth)
  } neuron_cmd_e;

  // Reset mechanism applied after a spike.
  typedef enum logic {
    RST_SUBTRACT = 1'b0,  // V -= Vth (Eq. 1)
    RST_ZERO     = 1'b1   // V  = 0
  } reset_mode_e;

  // ---------------------------------------------------------------- config
  // Target of a configuration write.
  typedef enum logic [2:0] {
    CFG_REG   = 3'd0,  // control register, selected by addr
    CFG_W0    = 3'd1,  // hidden-layer weight: addr = input, index = neuron
    CFG_W1    = 3'd2,  // output-layer weight: addr = hidden, index = neuron
    CFG_FB    = 3'd3   // feedback table entry of hidden neuron index
  } cfg_target_e;

  // Control register addresses (target CFG_REG).
  typedef enum logic [3:0] {
    REG_GATE_K     = 4'd0,  // time gating value K (0 = never update)
    REG_TRAIN      = 4'd1,  // bit0: training mode, bit1: external feedback
    REG_TIMESTEPS  = 4'd2,  // timesteps per sample
    REG_VTH0       = 4'd3,  // threshold of layer 0
    REG_VTH1       = 4'd4,  // threshold of layer 1
    REG_BETA0      = 4'd5,  // leak shift of layer 0, beta = 1 - 2^-shift
    REG_BETA1      = 4'd6,  // leak shift of layer 1
    REG_RSTMODE    = 4'd7,  // bit0: layer 0, bit1: layer 1 (1 = to zero)
    REG_ETA_OUT    = 4'd8   // output-layer update magnitude
  } cfg_reg_e;

  typedef struct packed {
    logic        we;
    cfg_target_e target;
    logic [15:0] addr;
    logic [15:0] index;
    logic [31:0] data;
  } cfg_req_t;

  // Feedback-table word for target CFG_FB: data[15:0] = |c_i|,
  // data[16] = sign of c_i (1 = negative), data[31:24] = k(i).

  // Runtime parameters distributed by the configuration interface.
  typedef struct packed {
    logic [7:0]  gate_k;
    logic        train_mode;
    logic        ext_feedback;
    logic [7:0]  timesteps;
    logic [15:0] vth0;
    logic [15:0] vth1;
    logic [3:0]  beta_shift0;
    logic [3:0]  beta_shift1;
    reset_mode_e rst_mode0;
    reset_mode_e rst_mode1;
    logic [15:0] eta_out;
  } run_cfg_t;

  // Signed saturation of a wide sum to W bits.
  function automatic logic signed [31:0] sat_signed(input logic signed [31:0] x,
                                                   input int unsigned w);
    logic signed [31:0] hi, lo;
    hi = (32'sd1 <<< (w - 1)) - 32'sd1;
    lo = -(32'sd1 <<< (w - 1));
    if (x > hi)      return hi;
    else if (x < lo) return lo;
    else             return x;
  endfunction

endpackage
