// tb_output_weight_updater: every combination of hidden spike, desired and
// actual output spike and gate, random weights, against
// w + eta*(s_d - s_o)*s_pre.
module tb_output_weight_updater;
  localparam int WB = 16;
  int checks = 0, failures = 0;
  logic s_pre, s_d, s_o, gate, updated;
  logic [WB-1:0] eta;
  logic signed [WB-1:0] weight, weight_out;

  output_weight_updater #(.WB(WB)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expw;
    for (int rep = 0; rep < 40; rep++) begin
      for (int v = 0; v < 16; v++) begin
        {s_pre, s_d, s_o, gate} = 4'(v);
        eta    = WB'($urandom % 100 + 1);
        weight = WB'(int'($urandom % 4000) - 2000);
        #1;
        expw = int'(weight) + ((s_pre && gate) ? int'(eta) * (int'(s_d) - int'(s_o)) : 0);
        checks++;
        if (int'(weight_out) != expw || updated != (s_pre && gate && (s_d != s_o))) begin
          failures++;
          $display("FAIL v=%b w=%0d eta=%0d got=%0d exp=%0d", 4'(v), weight, eta, weight_out, expw);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
