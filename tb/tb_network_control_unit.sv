// tb_network_control_unit: the two layers are replaced by counters that
// answer start with done after a fixed delay. Runs samples in inference
// and training mode with a toggling g and a slow input source, and checks
// the order of events in each timestep, that training passes are started
// exactly when training mode and g are both on, the number of timesteps
// and the end-of-sample pulse.
module tb_network_control_unit;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start, train_mode, g, in_valid, in_ready;
  logic l0_done, l1_done, clear, gate_start, load0, start0, load1, start1;
  logic ts_valid, start_train, train_gate, step, sample_done, busy;
  logic [7:0] timesteps, t_idx;
  int d0_cnt, d1_cnt;

  network_control_unit #(.TW(8)) dut (.*);
  always #5 clk = ~clk;

  // layer models: done after 7 (layer 0) / 4 (layer 1) cycles, training 5 / 3
  always_ff @(posedge clk) begin
    l0_done <= (d0_cnt == 1);
    l1_done <= (d1_cnt == 1);
    if (start0) d0_cnt <= 7; else if (start_train) d0_cnt <= 5; else if (d0_cnt > 0) d0_cnt <= d0_cnt - 1;
    if (start1) d1_cnt <= 4; else if (start_train) d1_cnt <= 3; else if (d1_cnt > 0) d1_cnt <= d1_cnt - 1;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_ts, n_trn, n_step, exp_trn, n_in, phase;
    start = 0; train_mode = 0; g = 0; in_valid = 0; timesteps = 4;
    d0_cnt = 0; d1_cnt = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      train_mode = s[0]; timesteps = 8'(3 + s);
      n_ts = 0; n_trn = 0; n_step = 0; exp_trn = 0; n_in = 0; phase = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      chk(clear && gate_start, "clear at sample start");
      while (!sample_done) begin
        in_valid = in_ready && ($urandom % 2);
        #1;
        if (load0) begin chk(phase == 0, "input order"); phase = 1; n_in++; end
        if (start1) begin chk(phase == 1 && load1, "layer 1 after layer 0"); phase = 2; end
        if (ts_valid) begin
          chk(phase == 2, "s_o after layer 1"); phase = 3; n_ts++;
          g = ($urandom % 2);
          if (train_mode && g) exp_trn++;
        end
        if (start_train) begin chk(phase == 3 && train_mode && g, "training gated"); n_trn++; end
        if (step) begin chk(phase == 3, "step order"); phase = 0; n_step++; end
        @(negedge clk);
      end
      chk(n_ts == int'(timesteps) && n_step == int'(timesteps) && n_in == int'(timesteps),
          $sformatf("timesteps %0d %0d", n_ts, n_step));
      chk(n_trn == exp_trn, "training pass count");
      @(negedge clk); chk(!busy, "idle after sample");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
