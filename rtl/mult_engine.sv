// mult_engine: multiply engine of a processing element.
//
// Multiplies all NT = K*K activations of one input window with the matching
// weights of one filter in the same clock, as in the multiply engine of the
// paper's PE, and registers the full-width products (one clock of latency).
// Activations and weights are 13-bit two's complement; products are 26 bits
// and are not rounded here (this design quantises once, after the
// activation).
module mult_engine
  import sr_pkg::*;
#(
  parameter int unsigned NT = 9
) (
  input  logic  clk,
  input  act_t  a [NT],
  input  wgt_t  w [NT],
  output prod_t p [NT]
);
  always_ff @(posedge clk)
    for (int i = 0; i < NT; i++) p[i] <= prod_t'(a[i]) * prod_t'(w[i]);
endmodule
