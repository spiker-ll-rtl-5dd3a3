// layer_control_unit: finite-state machine of one layer.
//
// Inference pass (start_inf): LEAK once, then stream every input channel
// 0..N_IN-1 through the spike barrier and the weight memory (one channel
// per cycle) while the neurons accumulate, then FIRE. Training pass
// (start_train): the mirrored training states stream the same channels
// with the same address counter and read enables, and write each word
// back, one cycle after its read, with the updated weights. clear
// (accepted in IDLE) resets all membranes at the start of a sample.
//
// Following the paper: a per-layer FSM whose training states mirror the
// inference states and reuse the same control signals, sequential
// streaming of input channels, neurons working in parallel, a training
// pass that at most doubles the cycle count. Own choices: the state list,
// visiting every channel (no skipping of silent inputs) and the
// one-cycle read-to-write pipeline.
//
// Timing (start seen in IDLE at cycle 0): inference raises done in cycle
// N_IN+3, training in cycle N_IN+1. data_valid/data_addr mark the cycle in
// which the memory word and barrier spike of a channel are available.
module layer_control_unit
  import spiker_pkg::*;
#(
  parameter int unsigned N_IN = N_IN_DEF,
  parameter int unsigned AW   = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          start_inf,
  input  logic          start_train,
  output neuron_cmd_e   ncmd,
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  output logic          data_valid,
  output logic [AW-1:0] data_addr,
  output logic          wr_en,        // write back data_addr (training)
  output logic          train_phase,  // a training pass is running
  output logic          busy,
  output logic          done
);

  typedef enum logic [2:0] {
    S_IDLE, S_LEAK, S_EXC, S_EXC_LAST, S_FIRE, S_TRN, S_TRN_LAST
  } state_e;

  state_e        state;
  logic [AW-1:0] cnt;
  logic          last;

  assign last = (32'(cnt) == N_IN - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      data_valid <= 1'b0;
      data_addr  <= '0;
    end else begin
      data_valid <= rd_en;
      data_addr  <= rd_addr;
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (start_inf)        state <= S_LEAK;
          else if (start_train) state <= S_TRN;
        end
        S_LEAK: state <= S_EXC;
        S_EXC: begin
          cnt <= cnt + 1'b1;
          if (last) state <= S_EXC_LAST;
        end
        S_EXC_LAST: state <= S_FIRE;
        S_FIRE:     state <= S_IDLE;
        S_TRN: begin
          cnt <= cnt + 1'b1;
          if (last) state <= S_TRN_LAST;
        end
        S_TRN_LAST: state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    rd_en       = (state == S_EXC) || (state == S_TRN);
    rd_addr     = cnt;
    train_phase = (state == S_TRN) || (state == S_TRN_LAST);
    wr_en       = train_phase && data_valid;
    busy        = (state != S_IDLE);
    done        = (state == S_FIRE) || (state == S_TRN_LAST);
    unique case (state)
      S_IDLE:                ncmd = clear ? NC_CLEAR : NC_IDLE;
      S_LEAK:                ncmd = NC_LEAK;
      S_EXC, S_EXC_LAST:     ncmd = data_valid ? NC_ACC : NC_IDLE;
      S_FIRE:                ncmd = NC_FIRE;
      default:               ncmd = NC_IDLE;
    endcase
  end

  // A pass may only be started from IDLE, and not both at once.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (start_inf || start_train) |-> (state == S_IDLE));
  a_one_start: assert property (@(posedge clk) disable iff (!rst_n)
    !(start_inf && start_train));

endmodule
