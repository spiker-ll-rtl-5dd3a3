// tb_weights_bram: random lane-masked writes and reads against a shadow
// copy, including a read of the address written in the same cycle (old
// data expected).
module tb_weights_bram;
  localparam int DEPTH = 24, LANES = 5, WB = 16, AW = $clog2(DEPTH);
  int checks = 0, failures = 0;
  logic clk = 0, rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [LANES*WB-1:0] rd_data, wr_data;
  logic [LANES-1:0] wr_lane;
  logic [LANES*WB-1:0] shadow [DEPTH];

  weights_bram #(.DEPTH(DEPTH), .LANES(LANES), .WB(WB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LANES*WB-1:0] expd;
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_data = '0; wr_lane = '0;
    // initialise every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a); wr_lane = '1;
      for (int l = 0; l < LANES; l++) wr_data[l*WB +: WB] = WB'($urandom);
      shadow[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = AW'($urandom % DEPTH);
      expd = shadow[rd_addr];
      wr_en = 1'($urandom); wr_addr = (n % 4 == 0) ? rd_addr : AW'($urandom % DEPTH);
      wr_lane = LANES'($urandom);
      for (int l = 0; l < LANES; l++) wr_data[l*WB +: WB] = WB'($urandom);
      if (wr_en)
        for (int l = 0; l < LANES; l++)
          if (wr_lane[l]) shadow[wr_addr][l*WB +: WB] = wr_data[l*WB +: WB];
      @(posedge clk); #1;
      checks++;
      if (rd_data != expd) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", rd_addr, rd_data, expd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
