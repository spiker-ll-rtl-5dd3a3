// tb_config_interface: checks the reset values of the control registers,
// random register writes, and the routing and range checks of weight and
// feedback-table writes.
module tb_config_interface;
  import spiker_pkg::*;
  localparam int NI = 784, NH = 200, NO = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  cfg_req_t cfg;
  run_cfg_t regs;
  logic w0_we, w1_we, fb_we, fb_neg;
  logic [9:0] w0_addr;
  logic [7:0] w0_lane, w1_addr, fb_idx;
  logic [3:0] w1_lane, fb_k;
  logic [15:0] w_data, fb_mag;

  config_interface #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .T(10)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(cfg_target_e tg, int a, int i, logic [31:0] d);
    @(negedge clk);
    cfg.we = 1; cfg.target = tg; cfg.addr = 16'(a); cfg.index = 16'(i); cfg.data = d;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    chk(regs.gate_k == 5 && regs.timesteps == 10 && regs.vth0 == 256 && regs.vth1 == 256
        && regs.beta_shift0 == 3 && !regs.train_mode && regs.eta_out == 7, "reset values");
    for (int n = 0; n < 50; n++) begin
      d = $urandom;
      wr(CFG_REG, REG_GATE_K, 0, d);      @(posedge clk); #1; chk(regs.gate_k == d[7:0], "K");
      wr(CFG_REG, REG_TRAIN, 0, d);       @(posedge clk); #1; chk(regs.train_mode == d[0] && regs.ext_feedback == d[1], "train");
      wr(CFG_REG, REG_VTH1, 0, d);        @(posedge clk); #1; chk(regs.vth1 == d[15:0], "vth1");
      wr(CFG_REG, REG_BETA0, 0, d);       @(posedge clk); #1; chk(regs.beta_shift0 == d[3:0], "beta0");
      wr(CFG_REG, REG_RSTMODE, 0, d);     @(posedge clk); #1; chk(regs.rst_mode1 == reset_mode_e'(d[1]), "rstmode");
      wr(CFG_REG, REG_ETA_OUT, 0, d);     @(posedge clk); #1; chk(regs.eta_out == d[15:0], "eta");
      wr(CFG_W0, n * 15, n % 220, d); #1;
      chk(w0_we == (n * 15 < NI && n % 220 < NH) && !w1_we && !fb_we && w0_addr == 10'(n * 15)
          && w0_lane == 8'(n % 220) && w_data == d[15:0], "w0 route");
      wr(CFG_W1, n * 5, n % 12, d); #1;
      chk(w1_we == (n * 5 < NH && n % 12 < NO) && !w0_we && w1_addr == 8'(n * 5)
          && w1_lane == 4'(n % 12), "w1 route");
      wr(CFG_FB, 0, n * 5, d); #1;
      chk(fb_we == (n * 5 < NH) && fb_idx == 8'(n * 5) && fb_k == d[27:24]
          && fb_neg == d[16] && fb_mag == d[15:0], "fb route");
      @(negedge clk); cfg.we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
