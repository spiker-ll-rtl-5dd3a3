// tb_update_adder: checks the weight-update adder against an integer model
// over random weights and magnitudes, including both saturation limits.
module tb_update_adder;
  localparam int WB = 16;
  int checks = 0, failures = 0;
  logic en, sub;
  logic signed [WB-1:0] weight, weight_out;
  logic [WB-1:0] mag;

  update_adder #(.WB(WB)) dut (.en, .sub, .weight, .mag, .weight_out);

  function automatic int ref_out(bit e, bit s, int w, int m);
    int r;
    if (!e) return w;
    r = s ? w - m : w + m;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      en = 1'($urandom); sub = 1'($urandom);
      weight = WB'($urandom); mag = WB'($urandom % ((n % 3 == 0) ? 65536 : 64));
      if (n < 4) begin weight = (n < 2) ? 16'sh7ff0 : -16'sh7ff0; mag = 16'h0100; en = 1; sub = n[0] ? 1'b0 : 1'b1; end
      #1;
      checks++;
      if (int'(weight_out) != ref_out(en, sub, int'(weight), int'(mag))) begin
        failures++;
        $display("FAIL en=%0b sub=%0b w=%0d m=%0d got=%0d", en, sub, weight, mag, weight_out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
