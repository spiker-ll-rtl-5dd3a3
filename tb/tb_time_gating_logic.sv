// tb_time_gating_logic: for K = 1..7 and K = 0 runs several samples of 13
// timesteps and checks g(t) == (t mod K == 0) at every timestep (never for
// K = 0), with the counter restarted at each sample.
module tb_time_gating_logic;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sample_start, step, g;
  logic [7:0] k_value;

  time_gating_logic #(.CW(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sample_start = 0; step = 0; k_value = 5;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k <= 7; k++) begin
      for (int s = 0; s < 2; s++) begin
        @(negedge clk); k_value = 8'(k); sample_start = 1;
        @(negedge clk); sample_start = 0;
        for (int t = 0; t < 13; t++) begin
          checks++;
          if (g != (k != 0 && (t % k) == 0)) begin
            failures++;
            $display("FAIL K=%0d t=%0d g=%0b", k, t, g);
          end
          step = 1; @(negedge clk); step = 0;
          repeat ($urandom % 3) @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
