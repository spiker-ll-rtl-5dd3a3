// time_gating_logic: temporal gating of weight updates, g(t).
//
// A timestep counter is compared for equality with the runtime gating
// value K; g = 1 when they match, so updates are allowed once every K
// timesteps. The counter is loaded with K at the start of each sample and
// then counts 1, 2, ..., K, 1, 2, ... on every timestep step, which gives
// g(t) = 1 exactly when t mod K = 0 (t = 0, K, 2K, ...).
//
// Following the paper (Fig. 1-C): a COUNTER, a TIME GATING VALUE (K)
// register held elsewhere, an equality compare producing g(t), and
// g(t) = 1 if t mod K = 0. Own choices: the load-with-K count sequence,
// the restart per sample, and K = 0 meaning "never update".
//
// Timing: g is combinational in the counter; sample_start and step act at
// the clock edge (step ends timestep t, so g then refers to t+1).
module time_gating_logic #(
  parameter int unsigned CW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sample_start,
  input  logic          step,
  input  logic [CW-1:0] k_value,
  output logic          g
);

  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            cnt <= '0;
    else if (sample_start) cnt <= k_value;
    else if (step)         cnt <= (cnt >= k_value) ? CW'(1) : cnt + 1'b1;
  end

  assign g = (k_value != '0) && (cnt == k_value);

endmodule
