// tb_layer_control_unit: runs inference and training passes for a 6-channel
// layer and checks, cycle by cycle, the command sequence (LEAK, one ACC per
// channel, FIRE), that every channel is read once in order, that training
// writes back each channel one cycle after its read, and the pass
// latencies N_IN+3 (inference) and N_IN+1 (training).
module tb_layer_control_unit;
  import spiker_pkg::*;
  localparam int NI = 6, AW = $clog2(NI);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear, start_inf, start_train;
  neuron_cmd_e ncmd;
  logic rd_en, data_valid, wr_en, train_phase, busy, done;
  logic [AW-1:0] rd_addr, data_addr;

  layer_control_unit #(.N_IN(NI)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, n_acc, n_leak, n_fire, n_rd, n_wr, next_rd, next_wr;
    clear = 0; start_inf = 0; start_train = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); clear = 1; #1; chk(ncmd == NC_CLEAR, "clear cmd");
    @(negedge clk); clear = 0;
    for (int r = 0; r < 6; r++) begin
      bit trn;
      trn = r % 2;
      @(negedge clk);
      if (trn) start_train = 1; else start_inf = 1;
      cyc = 0; n_acc = 0; n_leak = 0; n_fire = 0; n_rd = 0; n_wr = 0;
      next_rd = 0; next_wr = 0;
      @(negedge clk); start_inf = 0; start_train = 0; cyc = 1;
      while (!done && cyc < 100) begin
        if (ncmd == NC_ACC) n_acc++;
        if (ncmd == NC_LEAK) n_leak++;
        if (rd_en) begin chk(int'(rd_addr) == next_rd, "read order"); next_rd++; n_rd++; end
        if (wr_en) begin chk(int'(data_addr) == next_wr, "write order"); next_wr++; n_wr++; end
        chk(train_phase == trn || !busy, "phase");
        @(negedge clk); cyc++;
      end
      if (wr_en) begin chk(int'(data_addr) == next_wr, "write order"); n_wr++; end
      if (ncmd == NC_FIRE) n_fire++;
      chk(cyc == (trn ? NI + 1 : NI + 3), $sformatf("latency %0d", cyc));
      chk(n_rd == NI, "reads");
      if (trn) chk(n_wr == NI && n_acc == 0 && n_leak == 0 && n_fire == 0, "training pass");
      else     chk(n_acc == NI && n_leak == 1 && n_fire == 1 && n_wr == 0, "inference pass");
      @(negedge clk);
      chk(!busy && !done, "back to idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
