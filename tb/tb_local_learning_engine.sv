// tb_local_learning_engine: a hidden-layer engine (8 neurons, 3 output
// error bits) and an output-layer engine (3 neurons). Random spikes,
// errors and weight words are applied; every lane of the result is
// compared with the STSF rule computed from a copy of the feedback table
// kept by the testbench (reset contents first, then random table writes).
module tb_local_learning_engine;
  localparam int N = 8, NO = 3, WB = 16, IW = $clog2(N), KW = $clog2(NO);
  int checks = 0, failures = 0, n_upd = 0;
  logic clk = 0, rst_n = 0;
  logic s_pre, gate;
  logic [N-1:0] s_post, upd_h;
  logic [NO-1:0] s_d, s_o, upd_o;
  logic [WB-1:0] eta;
  logic [N*WB-1:0] win_h, wout_h;
  logic [NO*WB-1:0] win_o, wout_o;
  logic fb_we, fb_neg;
  logic [IW-1:0] fb_idx;
  logic [KW-1:0] fb_k;
  logic [WB-1:0] fb_mag;
  int tk[N], tneg[N], tmag[N];

  local_learning_engine #(.N(N), .N_OUT(NO), .IS_OUTPUT(0), .WB(WB), .C_DEF(7)) u_hid (
    .clk, .rst_n, .s_pre, .s_post, .s_d, .s_o, .gate, .eta,
    .weights_in(win_h), .weights_out(wout_h), .updated(upd_h),
    .fb_we, .fb_idx, .fb_k, .fb_neg, .fb_mag);

  local_learning_engine #(.N(NO), .N_OUT(NO), .IS_OUTPUT(1), .WB(WB)) u_out (
    .clk, .rst_n, .s_pre, .s_post(s_post[NO-1:0]), .s_d, .s_o, .gate, .eta,
    .weights_in(win_o), .weights_out(wout_o), .updated(upd_o),
    .fb_we(1'b0), .fb_idx('0), .fb_k('0), .fb_neg(1'b0), .fb_mag('0));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_lanes();
    int w, e, k, c;
    for (int i = 0; i < N; i++) begin
      k = tk[i];
      c = tneg[i] ? -tmag[i] : tmag[i];
      w = int'($signed(win_h[i*WB +: WB]));
      e = w + ((s_pre && s_post[i] && gate) ? c * (int'(s_d[k]) - int'(s_o[k])) : 0);
      checks++;
      if (int'($signed(wout_h[i*WB +: WB])) != e) begin
        failures++;
        $display("FAIL hidden lane %0d got %0d exp %0d", i, $signed(wout_h[i*WB +: WB]), e);
      end
      if (e != w) n_upd++;
    end
    for (int j = 0; j < NO; j++) begin
      w = int'($signed(win_o[j*WB +: WB]));
      e = w + ((s_pre && gate) ? int'(eta) * (int'(s_d[j]) - int'(s_o[j])) : 0);
      checks++;
      if (int'($signed(wout_o[j*WB +: WB])) != e) begin
        failures++;
        $display("FAIL output lane %0d got %0d exp %0d", j, $signed(wout_o[j*WB +: WB]), e);
      end
    end
  endtask

  task automatic random_inputs();
    s_pre = ($urandom % 4) != 0; gate = ($urandom % 4) != 0;
    s_post = N'($urandom); s_d = NO'($urandom); s_o = NO'($urandom);
    eta = WB'($urandom % 50);
    for (int i = 0; i < N; i++) win_h[i*WB +: WB] = WB'(int'($urandom % 2000) - 1000);
    for (int j = 0; j < NO; j++) win_o[j*WB +: WB] = WB'(int'($urandom % 2000) - 1000);
  endtask

  initial begin
    fb_we = 0; fb_idx = 0; fb_k = 0; fb_neg = 0; fb_mag = 0;
    for (int i = 0; i < N; i++) begin tk[i] = i % NO; tneg[i] = 0; tmag[i] = 7; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk); random_inputs(); #1; check_lanes();
    end
    // rewrite the feedback table
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      fb_we = 1; fb_idx = IW'(i); fb_k = KW'($urandom % NO); fb_neg = 1'($urandom);
      fb_mag = WB'($urandom % 300);
      tk[i] = int'(fb_k); tneg[i] = int'(fb_neg); tmag[i] = int'(fb_mag);
    end
    @(negedge clk); fb_we = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk); random_inputs(); #1; check_lanes();
    end
    checks++;
    if (n_upd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
