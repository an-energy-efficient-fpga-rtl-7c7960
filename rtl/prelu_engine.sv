// prelu_engine: activation engine at the end of every output neuron.
//
// Following the paper's activation engine: the bias B is added to the
// neuron's sum, and a negative result is multiplied by the learned PReLU
// slope P while a non-negative one passes; a multiplexer picks between the
// two. With act_en low the slope stage is bypassed, which is how the
// deconvolution layer (no activation) uses the same engine.
//
// Formats (this design's choice): sum has A_FRAC+W_FRAC = 18 fraction bits,
// bias is an activation (8 fraction bits), slope a weight (10 fraction bits).
// The result is shifted down by W_FRAC (floor) and saturated to a 13-bit
// activation. Latency: two clocks, the bias adder and the slope multiplier
// each followed by a register; act_en and slope are sampled with the sum.
module prelu_engine
  import sr_pkg::*;
#(
  parameter int unsigned IW = 36
) (
  input  logic                 clk,
  input  logic                 act_en,
  input  logic signed [IW-1:0] sum,
  input  act_t                 bias,
  input  wgt_t                 slope,
  output act_t                 out
);
  localparam int unsigned XW2 = IW + 2 + DW;

  logic signed [IW+1:0]  s_q;
  logic                  en_q;
  wgt_t                  slope_q;
  logic signed [XW2-1:0] v;

  always_ff @(posedge clk) begin
    s_q     <= (IW+2)'(sum) + ((IW+2)'(bias) <<< W_FRAC);
    en_q    <= act_en;
    slope_q <= slope;
  end

  always_comb begin
    if (en_q && s_q < 0) v = (XW2'(s_q) * XW2'(slope_q)) >>> W_FRAC;
    else                 v = XW2'(s_q);
  end

  always_ff @(posedge clk) out <= sat_act(64'(v >>> W_FRAC));
endmodule
