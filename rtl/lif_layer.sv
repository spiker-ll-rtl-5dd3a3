// lif_layer: one fully connected layer of LIF neurons with local learning.
//
// Puts together the spike barrier (input spikes of the timestep), the
// weight memory (one word per input channel, N lanes), N LIF neurons, the
// local learning engine (one weight updater per neuron) and the layer
// control unit. During inference the control unit streams the channels;
// each cycle one memory word reaches all neurons, and each neuron adds its
// lane when the channel's spike is 1. During a training pass the same
// words pass through the learning engine and are written back on the
// memory's second port. Host weight writes use the same second port when
// the layer is idle.
//
// Following the paper: per-layer BRAM, parallel neurons with sequential
// input channels, a learning module with as many updaters as neurons,
// write-back through a dual-port RAM. Own choice: the host write path
// (cfg_w_*), which is ignored while a training pass writes.
//
// Timing: see layer_control_unit; out_spikes are valid from the cycle
// after done of an inference pass until the next FIRE or clear.
module lif_layer
  import spiker_pkg::*;
#(
  parameter int unsigned N_IN      = N_IN_DEF,
  parameter int unsigned N         = N_HID_DEF,
  parameter int unsigned N_OUT     = N_OUT_DEF,
  parameter bit          IS_OUTPUT = 1'b0,
  parameter int unsigned WB        = WB_DEF,
  parameter int unsigned NB        = NB_DEF,
  parameter int unsigned AW        = (N_IN > 1) ? $clog2(N_IN) : 1,
  parameter int unsigned IW        = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned KW        = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // sequencing from the network control unit
  input  logic              clear,
  input  logic              barrier_load,
  input  logic [N_IN-1:0]   in_spikes,
  input  logic              start_inf,
  input  logic              start_train,
  input  logic              gate,          // g(t) AND training mode
  output logic              busy,
  output logic              done,
  output logic [N-1:0]      out_spikes,
  // error of the current timestep
  input  logic [N_OUT-1:0]  s_d,
  input  logic [N_OUT-1:0]  s_o,
  // runtime parameters
  input  logic [NB-1:0]     vth,
  input  logic [3:0]        beta_shift,
  input  reset_mode_e       rst_mode,
  input  logic [WB-1:0]     eta,
  // host writes
  input  logic              cfg_w_we,
  input  logic [AW-1:0]     cfg_w_addr,
  input  logic [IW-1:0]     cfg_w_lane,
  input  logic [WB-1:0]     cfg_w_data,
  input  logic              fb_we,
  input  logic [IW-1:0]     fb_idx,
  input  logic [KW-1:0]     fb_k,
  input  logic              fb_neg,
  input  logic [WB-1:0]     fb_mag,
  // observation
  output logic              upd_any,       // some synapse updated this cycle
  output logic signed [NB-1:0] v_mem [N]
);

  neuron_cmd_e         ncmd;
  logic                rd_en, data_valid, wr_en_cu, train_phase, pre_spike;
  logic [AW-1:0]       rd_addr, data_addr;
  logic [N*WB-1:0]     rd_data, upd_data, wr_data;
  logic [N-1:0]        updated, wr_lane;
  logic [N_IN-1:0]     barrier_q;
  logic                wr_en;
  logic [AW-1:0]       wr_addr;

  layer_control_unit #(.N_IN(N_IN), .AW(AW)) u_cu (
    .clk, .rst_n, .clear, .start_inf, .start_train,
    .ncmd, .rd_en, .rd_addr, .data_valid, .data_addr,
    .wr_en(wr_en_cu), .train_phase, .busy, .done
  );

  spike_barrier #(.N(N_IN), .AW(AW)) u_barrier (
    .clk, .rst_n, .load(barrier_load), .spikes_in(in_spikes),
    .rd_en, .rd_addr, .pre_spike, .spikes_q(barrier_q)
  );

  // Port B: training write-back has priority over host writes.
  always_comb begin
    if (wr_en_cu) begin
      wr_en   = 1'b1;
      wr_addr = data_addr;
      wr_data = upd_data;
      wr_lane = '1;
    end else begin
      wr_en   = cfg_w_we;
      wr_addr = cfg_w_addr;
      wr_data = {N{cfg_w_data}};
      wr_lane = N'(1) << cfg_w_lane;
    end
  end

  weights_bram #(.DEPTH(N_IN), .LANES(N), .WB(WB), .AW(AW)) u_bram (
    .clk, .rd_en, .rd_addr, .rd_data,
    .wr_en, .wr_addr, .wr_data, .wr_lane
  );

  for (genvar i = 0; i < N; i++) begin : g_neuron
    lif_neuron #(.NB(NB), .WB(WB)) u_neuron (
      .clk, .rst_n, .cmd(ncmd), .in_spike(pre_spike),
      .weight(rd_data[i*WB +: WB]), .vth, .beta_shift, .rst_mode,
      .spike(out_spikes[i]), .v_mem(v_mem[i])
    );
  end

  local_learning_engine #(
    .N(N), .N_OUT(N_OUT), .IS_OUTPUT(IS_OUTPUT), .WB(WB), .IW(IW), .KW(KW)
  ) u_engine (
    .clk, .rst_n, .s_pre(pre_spike), .s_post(out_spikes), .s_d, .s_o,
    .gate(gate && train_phase && data_valid), .eta,
    .weights_in(rd_data), .weights_out(upd_data), .updated,
    .fb_we, .fb_idx, .fb_k, .fb_neg, .fb_mag
  );

  assign upd_any = |updated;

endmodule
