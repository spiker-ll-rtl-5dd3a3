// network_control_unit: global sequencer of the accelerator.
//
// For each sample (start) it clears all neurons and restarts the time
// gating counter, then for each of `timesteps` timesteps:
//   1. waits for the timestep's input spike vector (in_valid/in_ready),
//      loads it into the layer-0 barrier and starts layer 0;
//   2. when layer 0 is done, loads its spikes into the layer-1 barrier and
//      starts layer 1;
//   3. when layer 1 is done, publishes s_o(t) (ts_valid);
//   4. if training mode is on and g(t) = 1, starts the training pass of
//      both layers at once (each has its own memory) and waits for both;
//   5. advances the gating counter (step).
// After the last timestep it pulses sample_done.
//
// Following the paper: a global controller coordinating the sequencing
// of the layers, inference and training modes, training passes only on
// gated timesteps. Own choices: layers run one after the other within a
// timestep (no overlap of layer 0 at t+1 with layer 1 at t), which lets the
// hidden layer's training pass use the output error of the same
// timestep; the valid/ready input handshake.
//
// Timing: in_ready is high only in WAIT_IN; in_valid with in_ready is one
// accepted timestep. All outputs are decoded from the registered state.
module network_control_unit #(
  parameter int unsigned TW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [TW-1:0] timesteps,
  input  logic          train_mode,
  input  logic          g,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic          l0_done,
  input  logic          l1_done,
  output logic          clear,
  output logic          gate_start,
  output logic          load0,
  output logic          start0,
  output logic          load1,
  output logic          start1,
  output logic          ts_valid,
  output logic          start_train,
  output logic          train_gate,
  output logic          step,
  output logic          sample_done,
  output logic          busy,
  output logic [TW-1:0] t_idx
);

  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_WAIT_IN, S_L0, S_L1_GO, S_L1, S_TS, S_TRN_GO,
    S_TRN, S_STEP, S_DONE
  } state_e;

  state_e state;
  logic   d0, d1;   // training pass of layer 0 / 1 finished

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t_idx <= '0;
      d0    <= 1'b0;
      d1    <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE:    if (start) state <= S_CLEAR;
        S_CLEAR: begin
          t_idx <= '0;
          state <= (timesteps == '0) ? S_DONE : S_WAIT_IN;
        end
        S_WAIT_IN: if (in_valid) state <= S_L0;
        S_L0:      if (l0_done) state <= S_L1_GO;
        S_L1_GO:   state <= S_L1;
        S_L1:      if (l1_done) state <= S_TS;
        S_TS:      state <= (train_mode && g) ? S_TRN_GO : S_STEP;
        S_TRN_GO: begin
          d0    <= 1'b0;
          d1    <= 1'b0;
          state <= S_TRN;
        end
        S_TRN: begin
          if (l0_done) d0 <= 1'b1;
          if (l1_done) d1 <= 1'b1;
          if ((d0 || l0_done) && (d1 || l1_done)) state <= S_STEP;
        end
        S_STEP: begin
          t_idx <= t_idx + 1'b1;
          state <= (t_idx + 1'b1 == timesteps) ? S_DONE : S_WAIT_IN;
        end
        S_DONE:    state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    in_ready    = (state == S_WAIT_IN);
    clear       = (state == S_CLEAR);
    gate_start  = (state == S_CLEAR);
    load0       = in_ready && in_valid;
    start0      = in_ready && in_valid;
    load1       = (state == S_L1_GO);
    start1      = (state == S_L1_GO);
    ts_valid    = (state == S_TS);
    start_train = (state == S_TRN_GO);
    train_gate  = (state == S_TRN_GO) || (state == S_TRN);
    step        = (state == S_STEP);
    sample_done = (state == S_DONE);
    busy        = (state != S_IDLE);
  end

endmodule
