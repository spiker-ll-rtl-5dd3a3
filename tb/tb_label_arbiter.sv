// tb_label_arbiter: supervised mode gives a one-hot target at the label;
// external mode passes the vector captured with the timestep input and
// ignores later changes until the next capture.
module tb_label_arbiter;
  localparam int NO = 10, KW = $clog2(NO);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, ext_mode, label_load, ext_load;
  logic [KW-1:0] label;
  logic [NO-1:0] ext_sd, s_d, held;
  int lab;

  label_arbiter #(.N_OUT(NO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ext_mode = 0; label_load = 0; ext_load = 0; label = 0; ext_sd = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      ext_mode = 0; lab = $urandom % NO; label = KW'(lab); label_load = 1;
      @(negedge clk); label_load = 0; label = KW'($urandom % NO);
      checks++;
      if (s_d != (NO'(1) << lab)) begin failures++; $display("FAIL label %0d got %h", lab, s_d); end
      ext_mode = 1; ext_sd = NO'($urandom); held = ext_sd; ext_load = 1;
      @(negedge clk); ext_load = 0; ext_sd = ~ext_sd;
      @(negedge clk);
      checks++;
      if (s_d != held) begin failures++; $display("FAIL ext %h exp %h", s_d, held); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
