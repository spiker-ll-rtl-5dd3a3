// tb_output_interface: random output spike trains over samples of random
// length; checks the latched s_o, the per-neuron spike counts and the
// classification (highest count, lowest index on a tie) at the end.
module tb_output_interface;
  localparam int NO = 10, CW = 8, KW = $clog2(NO);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear, ts_valid, sample_done, out_valid;
  logic [NO-1:0] so_in, so_q;
  logic [CW-1:0] counts [NO];
  logic [KW-1:0] class_out;
  int rc[NO];

  output_interface #(.N_OUT(NO), .CW(CW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best;
    clear = 0; ts_valid = 0; sample_done = 0; so_in = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 60; s++) begin
      @(negedge clk); clear = 1; for (int j = 0; j < NO; j++) rc[j] = 0;
      @(negedge clk); clear = 0;
      for (int t = 0; t < 3 + $urandom % 10; t++) begin
        for (int j = 0; j < NO; j++) so_in[j] = ($urandom % 3) == 0;
        if (s % 5 == 0) so_in[2] = 1;
        ts_valid = 1;
        for (int j = 0; j < NO; j++) rc[j] += so_in[j];
        @(negedge clk); ts_valid = 0;
        checks++;
        if (so_q != so_in) failures++;
        so_in = ~so_in;
        @(negedge clk);
      end
      best = 0;
      for (int j = 1; j < NO; j++) if (rc[j] > rc[best]) best = j;
      sample_done = 1; @(negedge clk); sample_done = 0;
      checks++;
      if (!out_valid || int'(class_out) != best) begin
        failures++;
        $display("FAIL class %0d exp %0d valid %0b", class_out, best, out_valid);
      end
      for (int j = 0; j < NO; j++) begin
        checks++;
        if (int'(counts[j]) != rc[j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
