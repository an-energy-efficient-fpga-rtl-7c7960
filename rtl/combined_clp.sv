// combined_clp: a K x K convolutional layer processor feeding a 1 x 1
// convolutional layer processor directly.
//
// Because every CLP unrolls all its loops, each output pixel of the first
// layer is complete the clock it leaves, and a 1 x 1 convolution needs no
// neighbours; so, as in the paper, the second layer takes the first layer's
// outputs without a line buffer in between. The paper's combined CLP1 is
// Conv(5,25,1)+Conv(1,5,25) and combined CLP2 is Conv(3,5,5)+Conv(1,25,5).
//
// Interface: as clp, with the weights of both layers (w1/bias1/slope1 for
// the K x K layer, w2/bias2/slope2 for the 1 x 1 layer). out_pos is the
// centre of the first layer's window; latency is the sum of both CLPs'.
module combined_clp
  import sr_pkg::*;
#(
  parameter int unsigned K  = 5,
  parameter int unsigned N  = 1,
  parameter int unsigned M1 = 25,
  parameter int unsigned M2 = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          in_valid,
  input  pos_t          in_pos,
  input  logic [DW-1:0] win [K][K][N],
  input  wgt_t          w1 [M1][N][K][K],
  input  act_t          bias1 [M1],
  input  wgt_t          slope1 [M1],
  input  wgt_t          w2 [M2][M1][1][1],
  input  act_t          bias2 [M2],
  input  wgt_t          slope2 [M2],
  output logic          out_valid,
  output pos_t          out_pos,
  output act_t          out [M2]
);
  logic          mid_valid;
  pos_t          mid_pos;
  act_t          mid [M1];
  logic [DW-1:0] mid_win [1][1][M1];

  clp #(.K(K), .M(M1), .N(N)) u_kxk (
    .clk, .rst_n, .cfg, .in_valid, .in_pos, .win,
    .w(w1), .bias(bias1), .slope(slope1),
    .out_valid(mid_valid), .out_pos(mid_pos), .out(mid));

  always_comb
    for (int i = 0; i < M1; i++) mid_win[0][0][i] = mid[i];

  clp #(.K(1), .M(M2), .N(M1)) u_1x1 (
    .clk, .rst_n, .cfg, .in_valid(mid_valid), .in_pos(mid_pos), .win(mid_win),
    .w(w2), .bias(bias2), .slope(slope2),
    .out_valid, .out_pos, .out);
endmodule
