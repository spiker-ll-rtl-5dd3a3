// tb_lif_neuron: drives random timesteps (CLEAR, LEAK, a burst of ACC with
// random input spikes and weights, FIRE) through one neuron and compares
// membrane potential and spike with an integer LIF model after every
// cycle. Both reset modes and several leak shifts are used; the counts of
// spikes, saturations and resets are checked to be non-zero.
module tb_lif_neuron;
  import spiker_pkg::*;
  localparam int NB = 16, WB = 16;
  int checks = 0, failures = 0, n_spk = 0, n_sat = 0;
  logic clk = 0, rst_n = 0;
  neuron_cmd_e cmd;
  logic in_spike, spike;
  logic signed [WB-1:0] weight;
  logic [NB-1:0] vth;
  logic [3:0] beta_shift;
  reset_mode_e rst_mode;
  logic signed [NB-1:0] v_mem;

  lif_neuron #(.NB(NB), .WB(WB)) dut (.*);

  always #5 clk = ~clk;

  int mv; bit ms;

  function automatic int sat16(int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction

  task automatic apply(neuron_cmd_e c, bit sp, int w);
    int nv;
    cmd = c; in_spike = sp; weight = WB'(w);
    @(posedge clk);
    nv = mv;
    case (c)
      NC_CLEAR: begin nv = 0; ms = 0; end
      NC_LEAK: begin
        if (ms && rst_mode == RST_ZERO) nv = 0;
        else nv = sat16(mv - ((beta_shift == 0) ? 0 : (mv >>> beta_shift)) - (ms ? int'(vth) : 0));
      end
      NC_ACC: if (sp) begin
        nv = sat16(mv + w);
        if (mv + w > 32767 || mv + w < -32768) n_sat++;
      end
      NC_FIRE: begin ms = (mv > int'(vth)); if (ms) n_spk++; end
      default: ;
    endcase
    mv = nv;
    #1;
    checks++;
    if (int'(v_mem) != mv || spike != ms) begin
      failures++;
      $display("FAIL cmd=%s v=%0d exp=%0d s=%0b exp=%0b", c.name(), v_mem, mv, spike, ms);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd = NC_IDLE; in_spike = 0; weight = 0; vth = 16'd256; beta_shift = 3;
    rst_mode = RST_SUBTRACT; mv = 0; ms = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int smp = 0; smp < 40; smp++) begin
      beta_shift = 4'($urandom % 5);
      rst_mode   = reset_mode_e'(smp % 2);
      vth        = 16'(128 + $urandom % 512);
      apply(NC_CLEAR, 0, 0);
      for (int t = 0; t < 10; t++) begin
        apply(NC_LEAK, 0, 0);
        for (int j = 0; j < 20; j++) begin
          int w;
          w = (smp % 7 == 6) ? 30000 : (int'($urandom % 600) - 200);
          apply(NC_ACC, 1'($urandom), w);
        end
        apply(NC_IDLE, 1, 100);
        apply(NC_FIRE, 0, 0);
      end
    end
    checks++;
    if (n_spk == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL coverage spikes=%0d saturations=%0d", n_spk, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
