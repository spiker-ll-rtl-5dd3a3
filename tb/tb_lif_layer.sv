// tb_lif_layer: a hidden layer of 4 neurons with 12 inputs and 3 error
// bits. Weights and the feedback table are loaded through the host write
// ports; then samples of 8 timesteps are run, each with an inference pass
// (spikes and membranes compared with the reference model) and, on
// alternate timesteps, a training pass with random s_d/s_o (all weights
// compared with the model afterwards). Also checks the pass latencies.
module tb_lif_layer;
  import spiker_pkg::*;
  import spiker_ref_pkg::*;
  localparam int NI = 12, N = 4, NO = 3, WB = 16, NB = 16;
  localparam int AW = $clog2(NI), IW = $clog2(N), KW = $clog2(NO);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic clear, barrier_load, start_inf, start_train, gate, busy, done, upd_any;
  logic [NI-1:0] in_spikes;
  logic [N-1:0] out_spikes;
  logic [NO-1:0] s_d, s_o;
  logic [NB-1:0] vth;
  logic [3:0] beta_shift;
  reset_mode_e rst_mode;
  logic [WB-1:0] eta, cfg_w_data, fb_mag;
  logic cfg_w_we, fb_we, fb_neg;
  logic [AW-1:0] cfg_w_addr;
  logic [IW-1:0] cfg_w_lane, fb_idx;
  logic [KW-1:0] fb_k;
  logic signed [NB-1:0] v_mem [N];
  layer_model m;

  lif_layer #(.N_IN(NI), .N(N), .N_OUT(NO), .IS_OUTPUT(0), .WB(WB), .NB(NB)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ins[], sd[], so[];
    int cyc, n_upd_cycles = 0;
    m = new(NI, N, NO, 0, 7);
    ins = new[NI]; sd = new[NO]; so = new[NO];
    clear = 0; barrier_load = 0; start_inf = 0; start_train = 0; gate = 0;
    in_spikes = 0; s_d = 0; s_o = 0; vth = 256; beta_shift = 2; rst_mode = RST_SUBTRACT;
    eta = 0; cfg_w_we = 0; cfg_w_addr = 0; cfg_w_lane = 0; cfg_w_data = 0;
    fb_we = 0; fb_idx = 0; fb_k = 0; fb_neg = 0; fb_mag = 0;
    m.shift = 2;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int j = 0; j < NI; j++)
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        cfg_w_we = 1; cfg_w_addr = AW'(j); cfg_w_lane = IW'(i);
        m.w[j][i] = int'($urandom % 260) - 60;
        cfg_w_data = WB'(m.w[j][i]);
      end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      cfg_w_we = 0; fb_we = 1; fb_idx = IW'(i); fb_k = KW'((i + 1) % NO);
      fb_neg = (i == 3); fb_mag = WB'(5 + 3 * i);
      m.k[i] = (i + 1) % NO; m.neg[i] = (i == 3); m.mag[i] = 5 + 3 * i;
    end
    @(negedge clk); fb_we = 0;
    for (int smp = 0; smp < 6; smp++) begin
      rst_mode = reset_mode_e'(smp % 2); m.rst_zero = smp % 2;
      clear = 1; m.clear(); @(negedge clk); clear = 0;
      for (int t = 0; t < 8; t++) begin
        for (int j = 0; j < NI; j++) begin ins[j] = ($urandom % 2); in_spikes[j] = ins[j]; end
        barrier_load = 1; start_inf = 1;
        @(negedge clk); barrier_load = 0; start_inf = 0; in_spikes = ~in_spikes; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        chk(cyc == NI + 3, $sformatf("inference latency %0d", cyc));
        @(negedge clk);
        m.infer(ins);
        for (int i = 0; i < N; i++)
          chk(out_spikes[i] == m.s[i] && int'(v_mem[i]) == m.v[i],
              $sformatf("neuron %0d v=%0d exp %0d s=%0b exp %0b", i, v_mem[i], m.v[i], out_spikes[i], m.s[i]));
        if (t % 2 == 0) begin
          for (int o = 0; o < NO; o++) begin sd[o] = $urandom % 2; so[o] = $urandom % 2; end
          foreach (sd[o]) begin s_d[o] = sd[o]; s_o[o] = so[o]; end
          gate = 1; start_train = 1;
          @(negedge clk); start_train = 0; cyc = 1;
          while (!done) begin if (upd_any) n_upd_cycles++; @(negedge clk); cyc++; end
          chk(cyc == NI + 1, $sformatf("training latency %0d", cyc));
          @(negedge clk); gate = 0;
          m.train(ins, sd, so);
        end
      end
      // Read every weight back through the datapath: after a clear, an
      // inference pass with only channel j active leaves V_i = w[j][i].
      for (int j = 0; j < NI; j++) begin
        clear = 1; @(negedge clk); clear = 0;
        in_spikes = NI'(1) << j; barrier_load = 1; start_inf = 1;
        @(negedge clk); barrier_load = 0; start_inf = 0;
        while (!done) @(negedge clk);
        @(negedge clk);
        for (int i = 0; i < N; i++)
          chk(int'(v_mem[i]) == m.w[j][i],
              $sformatf("weight %0d,%0d = %0d exp %0d", j, i, v_mem[i], m.w[j][i]));
      end
    end
    chk(m.n_pot > 0 && m.n_dep > 0 && n_upd_cycles > 0, "updates happened");
    $display("potentiations=%0d depressions=%0d", m.n_pot, m.n_dep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
