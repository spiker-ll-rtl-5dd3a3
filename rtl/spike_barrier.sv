// spike_barrier: input spike register of one layer.
//
// Captures the whole spike vector a layer receives in one timestep (the
// external input for layer 0, the spikes of layer 0 for layer 1), so the
// producer may move on while the layer streams the channels one by one.
// The paper names the block and places it at the layer input; the
// register-plus-multiplexer realisation is this design's own.
//
// Timing: load captures spikes_in at the clock edge. When rd_en is high the
// spike of channel rd_addr appears on pre_spike one cycle later, aligned
// with the synchronous read of the weight memory at the same address.
module spike_barrier #(
  parameter int unsigned N  = 784,
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [N-1:0]  spikes_in,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          pre_spike,
  output logic [N-1:0]  spikes_q     // held vector
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spikes_q  <= '0;
      pre_spike <= 1'b0;
    end else begin
      if (load) spikes_q <= spikes_in;
      if (rd_en) pre_spike <= (32'(rd_addr) < N) ? spikes_q[rd_addr] : 1'b0;
    end
  end

endmodule
