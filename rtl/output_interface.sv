// output_interface: output spikes, spike counts and classification.
//
// Latches the output-layer spike vector s_o(t) at the end of each
// timestep (ts_valid) into the register that, together with s_d(t), forms
// the error presented to the learning engines. It also counts the spikes
// of every output neuron over the sample and, at the end of the sample,
// reports the neuron with the highest count (lowest index on a tie).
//
// Following the paper: the output interface and the {s_d(t), s_o(t)}
// register feeding the learners, classification results leaving the
// accelerator. Own choices: rate (spike-count) decoding, the tie rule and
// saturating CW-bit counters.
//
// Timing: clear resets counts and s_o; out_valid pulses one cycle after
// sample_done with class_out and counts held until the next clear.
module output_interface #(
  parameter int unsigned N_OUT = 10,
  parameter int unsigned CW    = 8,
  parameter int unsigned KW    = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             ts_valid,
  input  logic [N_OUT-1:0] so_in,
  input  logic             sample_done,
  output logic [N_OUT-1:0] so_q,
  output logic [CW-1:0]    counts [N_OUT],
  output logic [KW-1:0]    class_out,
  output logic             out_valid
);

  logic [KW-1:0] best_idx;
  logic [CW-1:0] best_cnt;

  always_comb begin
    best_idx = '0;
    best_cnt = counts[0];
    for (int j = 1; j < N_OUT; j++) begin
      if (counts[j] > best_cnt) begin
        best_cnt = counts[j];
        best_idx = KW'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      so_q      <= '0;
      class_out <= '0;
      out_valid <= 1'b0;
      for (int j = 0; j < N_OUT; j++) counts[j] <= '0;
    end else begin
      out_valid <= sample_done;
      if (clear) begin
        so_q <= '0;
        for (int j = 0; j < N_OUT; j++) counts[j] <= '0;
      end else if (ts_valid) begin
        so_q <= so_in;
        for (int j = 0; j < N_OUT; j++)
          if (so_in[j] && counts[j] != '1) counts[j] <= counts[j] + 1'b1;
      end
      if (sample_done) class_out <= best_idx;
    end
  end

endmodule
