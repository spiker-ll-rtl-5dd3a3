// spiker_ll_top: two-layer Spiker-LL accelerator with on-device STSF learning.
//
// A fully connected spiking network N_IN-N_HID-N_OUT (784-200-10 by
// default) of LIF neurons. Layer 0 (hidden) and layer 1 (output) each
// have a spike barrier, a dual-port weight memory, parallel neurons, a
// local learning engine and a layer control unit; a network control unit
// sequences the timesteps and, in training mode, the weight-update passes
// allowed by the time gating logic. The label arbiter provides the desired
// output spikes s_d(t), from a label or from an external source; the
// output interface holds s_o(t), counts output spikes and classifies.
//
// Interface:
//   cfg            configuration writes (spiker_pkg::cfg_req_t): control
//                  registers, weights, feedback table; write weights only
//                  while busy is low.
//   start, label   begin a sample (label used in supervised training).
//   in_valid/ready one timestep's input spikes; ext_sd is the external
//                  desired-spike vector captured with it.
//   ts_valid, s_o  output spikes of the timestep just computed; s_d the
//                  desired spikes in force.
//   out_valid      end of sample: out_class and out_counts valid.
//   upd0, upd1     a weight of layer 0 / 1 changed in this cycle.
//   gate           g(t) of the current timestep.
//
// Timing per timestep: 1 cycle to accept the input, N_IN+3 cycles for
// layer 0, N_HID+4 for layer 1, 1 to publish s_o, N_IN+3 for a training
// pass when one is due, 1 to step. See the README for the derivation.
module spiker_ll_top
  import spiker_pkg::*;
#(
  parameter int unsigned N_IN  = N_IN_DEF,
  parameter int unsigned N_HID = N_HID_DEF,
  parameter int unsigned N_OUT = N_OUT_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned WB    = WB_DEF,
  parameter int unsigned NB    = NB_DEF,
  parameter int unsigned KW    = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_req_t         cfg,
  input  logic             start,
  input  logic [KW-1:0]    label,
  output logic             busy,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [N_IN-1:0]  in_spikes,
  input  logic [N_OUT-1:0] ext_sd,
  output logic             ts_valid,
  output logic [N_OUT-1:0] s_o,
  output logic [N_OUT-1:0] s_d,
  output logic             out_valid,
  output logic [KW-1:0]    out_class,
  output logic [7:0]       out_counts [N_OUT],
  output logic             upd0,
  output logic             upd1,
  output logic             gate
);

  localparam int unsigned A0W = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned A1W = (N_HID > 1) ? $clog2(N_HID) : 1;

  run_cfg_t             regs;
  logic                 w0_we, w1_we, fb_we, fb_neg;
  logic [A0W-1:0]       w0_addr;
  logic [A1W-1:0]       w0_lane, w1_addr, fb_idx;
  logic [KW-1:0]        w1_lane, fb_k;
  logic [15:0]          w_data, fb_mag;

  logic clear, gate_start, load0, start0, load1, start1, start_train;
  logic train_gate, step, sample_done;
  logic l0_busy, l0_done, l1_busy, l1_done;
  logic [N_HID-1:0] h_spikes;
  logic [N_OUT-1:0] o_spikes;
  logic [7:0]       t_idx;
  logic signed [NB-1:0] v0 [N_HID];
  logic signed [NB-1:0] v1 [N_OUT];

  config_interface #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .T(T),
    .A0W(A0W), .A1W(A1W), .L1W(KW)
  ) u_cfg (
    .clk, .rst_n, .cfg, .regs,
    .w0_we, .w0_addr, .w0_lane, .w1_we, .w1_addr, .w1_lane, .w_data,
    .fb_we, .fb_idx, .fb_k, .fb_neg, .fb_mag
  );

  time_gating_logic #(.CW(8)) u_gate (
    .clk, .rst_n, .sample_start(gate_start), .step, .k_value(regs.gate_k),
    .g(gate)
  );

  network_control_unit #(.TW(8)) u_ncu (
    .clk, .rst_n, .start, .timesteps(regs.timesteps),
    .train_mode(regs.train_mode), .g(gate), .in_valid, .in_ready,
    .l0_done, .l1_done, .clear, .gate_start, .load0, .start0, .load1,
    .start1, .ts_valid, .start_train, .train_gate, .step, .sample_done,
    .busy, .t_idx
  );

  label_arbiter #(.N_OUT(N_OUT), .KW(KW)) u_arbiter (
    .clk, .rst_n, .ext_mode(regs.ext_feedback), .label_load(start && !busy),
    .label, .ext_load(load0), .ext_sd, .s_d
  );

  lif_layer #(
    .N_IN(N_IN), .N(N_HID), .N_OUT(N_OUT), .IS_OUTPUT(1'b0),
    .WB(WB), .NB(NB), .AW(A0W), .IW(A1W), .KW(KW)
  ) u_layer0 (
    .clk, .rst_n, .clear, .barrier_load(load0), .in_spikes,
    .start_inf(start0), .start_train, .gate(train_gate),
    .busy(l0_busy), .done(l0_done), .out_spikes(h_spikes),
    .s_d, .s_o,
    .vth(NB'(regs.vth0)), .beta_shift(regs.beta_shift0),
    .rst_mode(regs.rst_mode0), .eta(WB'(regs.eta_out)),
    .cfg_w_we(w0_we), .cfg_w_addr(w0_addr), .cfg_w_lane(w0_lane),
    .cfg_w_data(WB'(w_data)),
    .fb_we, .fb_idx, .fb_k, .fb_neg, .fb_mag(WB'(fb_mag)),
    .upd_any(upd0), .v_mem(v0)
  );

  lif_layer #(
    .N_IN(N_HID), .N(N_OUT), .N_OUT(N_OUT), .IS_OUTPUT(1'b1),
    .WB(WB), .NB(NB), .AW(A1W), .IW(KW), .KW(KW)
  ) u_layer1 (
    .clk, .rst_n, .clear, .barrier_load(load1), .in_spikes(h_spikes),
    .start_inf(start1), .start_train, .gate(train_gate),
    .busy(l1_busy), .done(l1_done), .out_spikes(o_spikes),
    .s_d, .s_o,
    .vth(NB'(regs.vth1)), .beta_shift(regs.beta_shift1),
    .rst_mode(regs.rst_mode1), .eta(WB'(regs.eta_out)),
    .cfg_w_we(w1_we), .cfg_w_addr(w1_addr), .cfg_w_lane(w1_lane),
    .cfg_w_data(WB'(w_data)),
    .fb_we(1'b0), .fb_idx('0), .fb_k('0), .fb_neg(1'b0), .fb_mag('0),
    .upd_any(upd1), .v_mem(v1)
  );

  output_interface #(.N_OUT(N_OUT), .CW(8), .KW(KW)) u_out (
    .clk, .rst_n, .clear, .ts_valid, .so_in(o_spikes), .sample_done,
    .so_q(s_o), .counts(out_counts), .class_out(out_class), .out_valid
  );

  // Host weight writes must not race a running pass.
  a_wr_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (w0_we || w1_we) |-> !(l0_busy || l1_busy));

endmodule
