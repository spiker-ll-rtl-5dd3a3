// update_adder: the ADDER of a weight updater.
//
// out = weight + mag when en and not sub, weight - mag when en and sub,
// weight otherwise; the result saturates to the signed WB-bit range, so
// repeated updates cannot wrap a weight around. The EN and SUB inputs and
// the selection among -c, 0 and +c follow the paper; saturation is this
// design's choice (the paper's software model mentions saturation among
// the hardware non-idealities it reproduces). Purely combinational.
module update_adder
  import spiker_pkg::*;
#(
  parameter int unsigned WB = WB_DEF
) (
  input  logic                 en,
  input  logic                 sub,
  input  logic signed [WB-1:0] weight,
  input  logic        [WB-1:0] mag,     // unsigned update magnitude
  output logic signed [WB-1:0] weight_out
);

  logic signed [31:0] w_ext, m_ext, sum;

  always_comb begin
    w_ext = 32'(weight);
    m_ext = $signed({16'd0, 16'(mag)});
    sum   = sub ? (w_ext - m_ext) : (w_ext + m_ext);
    weight_out = en ? WB'(sat_signed(sum, WB)) : weight;
  end

endmodule
