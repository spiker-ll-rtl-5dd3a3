// tb_hidden_weight_updater: every combination of pre/post spike, desired
// and actual output spike, gate and sign of c_i, with random weights and
// magnitudes, against the three-factor rule written out directly.
module tb_hidden_weight_updater;
  localparam int WB = 16;
  int checks = 0, failures = 0, n_pot = 0, n_dep = 0;
  logic s_pre, s_post, s_d, s_o, gate, c_neg, updated;
  logic [WB-1:0] c_mag;
  logic signed [WB-1:0] weight, weight_out;

  hidden_weight_updater #(.WB(WB)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int phi, expw;
    for (int rep = 0; rep < 20; rep++) begin
      for (int v = 0; v < 64; v++) begin
        {s_pre, s_post, s_d, s_o, gate, c_neg} = 6'(v);
        c_mag  = WB'($urandom % 200);
        weight = WB'(int'($urandom % 4000) - 2000);
        #1;
        // Phi = c * (s_d - s_o) with c = +-|c|, then gated by l and g
        phi  = (c_neg ? -int'(c_mag) : int'(c_mag)) * (int'(s_d) - int'(s_o));
        expw = int'(weight) + ((s_pre && s_post && gate) ? phi : 0);
        checks++;
        if (int'(weight_out) != expw || updated != (s_pre && s_post && gate && (s_d != s_o))) begin
          failures++;
          $display("FAIL v=%b w=%0d c=%0d got=%0d exp=%0d", 6'(v), weight, c_mag, weight_out, expw);
        end
        if (expw > int'(weight)) n_pot++;
        if (expw < int'(weight)) n_dep++;
      end
    end
    checks++;
    if (n_pot == 0 || n_dep == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
