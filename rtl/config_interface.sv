// config_interface: runtime configuration of the accelerator.
//
// A single write-only request bus (cfg_req_t) reaches three kinds of
// state: control registers (gating value K, training/external-feedback
// mode, timesteps per sample, per-layer threshold, leak shift and reset
// mode, output-layer update magnitude), the two weight memories (one
// 16-bit weight per write) and the hidden layer's DFA feedback table
// (k(i), sign and magnitude of c_i). Register writes take effect at the
// next clock edge; weight and table writes are forwarded combinationally
// to the layers.
//
// Following the paper: learning parameters can be changed at runtime
// through an extended configuration interface. Own choices: the bus, the
// register map (spiker_pkg::cfg_reg_e) and the reset values (K = 5, ten
// timesteps, threshold 1.0, beta = 0.875, subtractive reset, magnitude
// 7 = 0.026 in Q8, i.e. the MNIST settings of the evaluation).
module config_interface
  import spiker_pkg::*;
#(
  parameter int unsigned N_IN  = N_IN_DEF,
  parameter int unsigned N_HID = N_HID_DEF,
  parameter int unsigned N_OUT = N_OUT_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned A0W   = (N_IN > 1) ? $clog2(N_IN) : 1,
  parameter int unsigned A1W   = (N_HID > 1) ? $clog2(N_HID) : 1,
  parameter int unsigned L1W   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  cfg_req_t        cfg,
  output run_cfg_t        regs,
  // layer-0 weight write
  output logic            w0_we,
  output logic [A0W-1:0]  w0_addr,
  output logic [A1W-1:0]  w0_lane,
  // layer-1 weight write
  output logic            w1_we,
  output logic [A1W-1:0]  w1_addr,
  output logic [L1W-1:0]  w1_lane,
  output logic [15:0]     w_data,
  // feedback table write
  output logic            fb_we,
  output logic [A1W-1:0]  fb_idx,
  output logic [L1W-1:0]  fb_k,
  output logic            fb_neg,
  output logic [15:0]     fb_mag
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs.gate_k       <= 8'd5;
      regs.train_mode   <= 1'b0;
      regs.ext_feedback <= 1'b0;
      regs.timesteps    <= 8'(T);
      regs.vth0         <= VTH_ONE;
      regs.vth1         <= VTH_ONE;
      regs.beta_shift0  <= 4'd3;
      regs.beta_shift1  <= 4'd3;
      regs.rst_mode0    <= RST_SUBTRACT;
      regs.rst_mode1    <= RST_SUBTRACT;
      regs.eta_out      <= 16'd7;
    end else if (cfg.we && cfg.target == CFG_REG) begin
      unique case (cfg.addr[3:0])
        REG_GATE_K:    regs.gate_k <= cfg.data[7:0];
        REG_TRAIN: begin
          regs.train_mode   <= cfg.data[0];
          regs.ext_feedback <= cfg.data[1];
        end
        REG_TIMESTEPS: regs.timesteps   <= cfg.data[7:0];
        REG_VTH0:      regs.vth0        <= cfg.data[15:0];
        REG_VTH1:      regs.vth1        <= cfg.data[15:0];
        REG_BETA0:     regs.beta_shift0 <= cfg.data[3:0];
        REG_BETA1:     regs.beta_shift1 <= cfg.data[3:0];
        REG_RSTMODE: begin
          regs.rst_mode0 <= reset_mode_e'(cfg.data[0]);
          regs.rst_mode1 <= reset_mode_e'(cfg.data[1]);
        end
        REG_ETA_OUT:   regs.eta_out     <= cfg.data[15:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    w0_we   = cfg.we && cfg.target == CFG_W0 && 32'(cfg.addr) < N_IN
              && 32'(cfg.index) < N_HID;
    w0_addr = A0W'(cfg.addr);
    w0_lane = A1W'(cfg.index);
    w1_we   = cfg.we && cfg.target == CFG_W1 && 32'(cfg.addr) < N_HID
              && 32'(cfg.index) < N_OUT;
    w1_addr = A1W'(cfg.addr);
    w1_lane = L1W'(cfg.index);
    w_data  = cfg.data[15:0];
    fb_we   = cfg.we && cfg.target == CFG_FB && 32'(cfg.index) < N_HID;
    fb_idx  = A1W'(cfg.index);
    fb_k    = L1W'(cfg.data[31:24]);
    fb_neg  = cfg.data[16];
    fb_mag  = cfg.data[15:0];
  end

endmodule
