// tb_spike_barrier: loads random vectors, reads every channel and checks
// that the spike of the addressed channel appears one cycle after the read,
// and that the held vector survives changes of the input between loads.
module tb_spike_barrier;
  localparam int N = 37, AW = $clog2(N);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load, rd_en, pre_spike;
  logic [N-1:0] spikes_in, spikes_q, ref_v;
  logic [AW-1:0] rd_addr;

  spike_barrier #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; rd_en = 0; rd_addr = 0; spikes_in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      for (int b = 0; b < N; b++) spikes_in[b] = 1'($urandom);
      ref_v = spikes_in; load = 1;
      @(negedge clk);
      load = 0; spikes_in = ~spikes_in;   // must not leak through
      for (int a = 0; a < N; a++) begin
        rd_en = 1; rd_addr = AW'(a);
        @(negedge clk);
        checks++;
        if (pre_spike != ref_v[a]) begin
          failures++;
          $display("FAIL ch %0d got %0b exp %0b", a, pre_spike, ref_v[a]);
        end
      end
      rd_en = 0;
      checks++;
      if (spikes_q != ref_v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
