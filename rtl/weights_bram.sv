// weights_bram: per-layer dual-port weight memory.
//
// One word per input channel; a word holds the weights of all LANES
// neurons of the layer, so one read feeds every neuron in parallel while
// the input channels are streamed sequentially. Port A reads, port B
// writes with a per-lane enable (like BRAM byte enables), used by the
// learning engine to write back a whole updated word and by the host to
// load single weights. The paper states that training replaced the
// inference-only single-port ROMs with dual-port RAMs; word layout and
// lane enables are this design's choices.
//
// Timing: synchronous read, data on rd_data one cycle after rd_en. A write
// lands at the clock edge; reading the address being written returns the
// old word. The memory is not reset: it must be loaded before use.
module weights_bram #(
  parameter int unsigned DEPTH = 784,
  parameter int unsigned LANES = 200,
  parameter int unsigned WB    = 16,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                  clk,
  // port A: read
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output logic [LANES*WB-1:0]   rd_data,
  // port B: write
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic [LANES*WB-1:0]   wr_data,
  input  logic [LANES-1:0]      wr_lane
);

  logic [LANES*WB-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < LANES; l++) begin
        if (wr_lane[l]) mem[wr_addr][l*WB +: WB] <= wr_data[l*WB +: WB];
      end
    end
  end

endmodule
