// spiker_ll_tb_body.svh: body shared by the reduced-size and the full-size
// system testbenches. The including module defines NI, NH, NO, T, the
// number of samples N_SAMPLES, the leak shift BETA_SHIFT and learning
// constant LR of the workload, and instantiates the top as `dut`.
//
// Every timestep the output spikes s_o(t) are compared with the reference
// model (spiker_ref_pkg), which applies the same learning rule to its own
// copy of the weights, so any wrong weight update shows up as a spike
// mismatch in a later timestep. End-of-sample counts, class and latency
// are checked too. Each mechanism (inference-only sample, training pass,
// gated timestep, hidden and output updates, potentiation, depression,
// external feedback, reset-to-zero, input stall, runtime reconfiguration)
// is counted and must happen at least once.

  localparam int KW = (NO > 1) ? $clog2(NO) : 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  cfg_req_t cfg;
  logic start, busy, in_valid, in_ready, ts_valid, out_valid, upd0, upd1, gate;
  logic [KW-1:0] label, out_class;
  logic [NI-1:0] in_spikes;
  logic [NO-1:0] ext_sd, s_o, s_d;
  logic [7:0] out_counts [NO];
  layer_model m0, m1;
  int n_infer_samples = 0, n_train_pass = 0, n_gated = 0, n_upd0 = 0, n_upd1 = 0;
  int n_ext = 0, n_rstzero = 0, n_stall = 0, n_reconf = 0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (upd0) n_upd0++;
    if (upd1) n_upd1++;
    if (in_ready && !in_valid) n_stall++;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s @%0t", what, $time);
    end
  endtask

  task automatic cfg_write(cfg_target_e tg, int a, int i, logic [31:0] d);
    @(negedge clk);
    cfg.we = 1; cfg.target = tg; cfg.addr = 16'(a); cfg.index = 16'(i); cfg.data = d;
    @(negedge clk);
    cfg.we = 0;
  endtask

  // weight ranges scaled so that roughly a quarter of the inputs drive a
  // neuron near threshold (1.0 = 256)
  function automatic int rnd_w(int fan_in, int density_pct);
    int r;
    r = (400 * 100) / (fan_in * density_pct);
    if (r < 1) r = 1;
    return int'($urandom % (4 * r + 1)) - r;
  endfunction

  task automatic run_sample(bit train, bit ext, int lab, bit stall);
    bit ins[], sd[], so[];
    int exp_cnt[], best, cyc, n_trn_here;
    bit g_model;
    ins = new[NI]; sd = new[NO]; so = new[NO]; exp_cnt = new[NO];
    m0.clear(); m1.clear();
    @(negedge clk);
    label = KW'(lab); start = 1;
    @(negedge clk); start = 0;
    cyc = 1; n_trn_here = 0;
    for (int t = 0; t < T; t++) begin
      for (int j = 0; j < NI; j++) begin
        ins[j] = ($urandom % 100) < 25;
        in_spikes[j] = ins[j];
      end
      for (int o = 0; o < NO; o++) begin
        ext_sd[o] = 1'($urandom);
        sd[o] = ext ? ext_sd[o] : (o == lab);
      end
      if (stall) repeat (1 + $urandom % 3) begin @(negedge clk); cyc++; end
      while (!in_ready) begin @(negedge clk); cyc++; end
      in_valid = 1;
      @(negedge clk); cyc++;
      in_valid = 0;
      while (!ts_valid) begin @(negedge clk); cyc++; end
      m0.infer(ins);
      m1.infer(m0.s);
      for (int o = 0; o < NO; o++) so[o] = m1.s[o];
      @(negedge clk); cyc++;
      for (int o = 0; o < NO; o++) begin
        chk(s_o[o] == so[o], $sformatf("t=%0d s_o[%0d]=%0b exp %0b", t, o, s_o[o], so[o]));
        chk(s_d[o] == sd[o], $sformatf("t=%0d s_d[%0d]", t, o));
        exp_cnt[o] += so[o];
      end
      g_model = (m0_k != 0) && (t % m0_k == 0);
      if (train && g_model) begin
        m0.train(ins, sd, so);
        m1.train(m0.s, sd, so);
        n_train_pass++; n_trn_here++;
      end else if (train) n_gated++;
    end
    while (!out_valid) begin @(negedge clk); cyc++; end
    best = 0;
    for (int o = 1; o < NO; o++) if (exp_cnt[o] > exp_cnt[best]) best = o;
    chk(int'(out_class) == best, $sformatf("class %0d exp %0d", out_class, best));
    for (int o = 0; o < NO; o++) chk(int'(out_counts[o]) == exp_cnt[o], "spike count");
    if (!stall)
      chk(cyc == 3 + T * (NI + NH + 10) + n_trn_here * (NI + 2),
          $sformatf("latency %0d cycles, expected %0d", cyc,
                    3 + T * (NI + NH + 10) + n_trn_here * (NI + 2)));
    $display("sample: train=%0b ext=%0b trainpasses=%0d cycles=%0d class=%0d",
             train, ext, n_trn_here, cyc, out_class);
    if (!train) n_infer_samples++;
    if (ext) n_ext++;
  endtask

  int m0_k = 5;

  initial begin
    #(64'd20_000_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; start = 0; in_valid = 0; label = '0; in_spikes = '0; ext_sd = '0;
    m0 = new(NI, NH, NO, 0, 7);
    m1 = new(NH, NO, NO, 1, 7);
    repeat (3) @(posedge clk); rst_n = 1;
    // load weights
    for (int j = 0; j < NI; j++)
      for (int i = 0; i < NH; i++) begin
        m0.w[j][i] = rnd_w(NI, 25);
        @(negedge clk);
        cfg.we = 1; cfg.target = CFG_W0; cfg.addr = 16'(j); cfg.index = 16'(i);
        cfg.data = 32'(m0.w[j][i]);
      end
    for (int j = 0; j < NH; j++)
      for (int i = 0; i < NO; i++) begin
        m1.w[j][i] = rnd_w(NH, 30);
        @(negedge clk);
        cfg.we = 1; cfg.target = CFG_W1; cfg.addr = 16'(j); cfg.index = 16'(i);
        cfg.data = 32'(m1.w[j][i]);
      end
    @(negedge clk); cfg.we = 0;
    // feedback table: random k(i), sign and magnitude
    for (int i = 0; i < NH; i++) begin
      m0.k[i] = $urandom % NO; m0.neg[i] = ($urandom % 4) == 0; m0.mag[i] = 1 + $urandom % (2 * LR);
      cfg_write(CFG_FB, 0, i, {8'(m0.k[i]), 7'd0, m0.neg[i], 16'(m0.mag[i])});
    end
    cfg_write(CFG_REG, REG_ETA_OUT, 0, 32'(LR)); m1.eta = LR;
    cfg_write(CFG_REG, REG_BETA0, 0, 32'(BETA_SHIFT)); m0.shift = BETA_SHIFT;
    cfg_write(CFG_REG, REG_BETA1, 0, 32'(BETA_SHIFT)); m1.shift = BETA_SHIFT;

    // 1. inference only
    run_sample(0, 0, 0, 0);
    // 2. supervised training, K = 5, labels cycling
    cfg_write(CFG_REG, REG_TRAIN, 0, 32'h1);
    for (int s = 0; s < N_SAMPLES; s++) run_sample(1, 0, s % NO, s == 1);
    // 3. runtime reconfiguration: K = 2, external feedback, reset to zero,
    //    a different leak in the hidden layer
    cfg_write(CFG_REG, REG_GATE_K, 0, 32'd2); m0_k = 2;
    cfg_write(CFG_REG, REG_TRAIN, 0, 32'h3);
    cfg_write(CFG_REG, REG_RSTMODE, 0, 32'h3); m0.rst_zero = 1; m1.rst_zero = 1;
    cfg_write(CFG_REG, REG_BETA0, 0, 32'd2); m0.shift = 2;
    n_reconf++; n_rstzero++;
    run_sample(1, 1, 0, 0);
    // 4. back to inference
    cfg_write(CFG_REG, REG_TRAIN, 0, 32'h0);
    run_sample(0, 0, 1, 0);

    $display("mechanisms: inference_samples=%0d training_passes=%0d gated_timesteps=%0d",
             n_infer_samples, n_train_pass, n_gated);
    $display("  hidden_update_cycles=%0d output_update_cycles=%0d potentiations=%0d depressions=%0d",
             n_upd0, n_upd1, m0.n_pot + m1.n_pot, m0.n_dep + m1.n_dep);
    $display("  external_feedback_samples=%0d reset_to_zero=%0d input_stall_cycles=%0d reconfigurations=%0d",
             n_ext, n_rstzero, n_stall, n_reconf);
    chk(n_infer_samples > 0, "inference mode");
    chk(n_train_pass > 0, "training pass");
    chk(n_gated > 0, "temporal gating skipped a timestep");
    chk(n_upd0 > 0 && m0.n_updates > 0, "hidden-layer updates");
    chk(n_upd1 > 0 && m1.n_updates > 0, "output-layer updates");
    chk(m0.n_pot + m1.n_pot > 0 && m0.n_dep + m1.n_dep > 0, "potentiation and depression");
    chk(n_ext > 0 && n_rstzero > 0 && n_stall > 0 && n_reconf > 0, "ext feedback / reset / stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
