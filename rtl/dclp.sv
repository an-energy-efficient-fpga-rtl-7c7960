// dclp: deconvolution layer processor built on the TDC method (transforming
// the deconvolution into a convolution).
//
// A stride-S deconvolution with a KD x KD kernel writes overlapping KD x KD
// blocks into the HR image. TDC turns it into a convolution over a Kc x Kc
// window of LR pixels that produces the S x S HR pixels of one block at once,
// one per output channel, so nothing overlaps and nothing is read back.
// Kc follows Eq. (2) of the method: 4, 3 and 2 for S = 2, 3 and 4 with
// KD = 7. Of the Kc*Kc*S*S coefficients of the equivalent convolution only
// KD*KD are non-zero, and since every deconvolution tap (yd, xd) lands on
// exactly one window input (yi, xi) and one block output (yo, xo) (inverse
// coefficient mapping, Eqs. (4)-(5)), the processor has exactly KD*KD
// multipliers per input map whatever S is. Each multiplier picks its input
// from the window by scale (sparse inputs) and its product is steered to the
// output lane yo*S + xo (the output index) - the load-balanced sparse
// arrangement of the paper, fully unrolled here so that one LR pixel is
// consumed per clock.
//
// Pipeline: input select and KD*KD*N multipliers (1 clock), adder trees over
// the N input maps for every tap (ceil(log2 N) clocks), output-index routing
// into S*S lane sums (1 clock), bias and quantisation in the activation
// engine with PReLU bypassed (2 clocks): 9 clocks for N = 25.
//
// Interface: win[r][c][n] is a KCMAX x KCMAX window (newest pixel at
// [KCMAX-1][KCMAX-1]); a scale with Kc < KCMAX uses its top-left Kc x Kc.
// wd[n][yd][xd] and bias are the deconvolution weights of the active scale.
// out[yo*S+xo] is HR pixel (S*out_pos.y + yo, S*out_pos.x + xo); lanes from
// S*S upward are zero. The HR image equals the full deconvolution
//   hr[Y][X] = bias + sum_n sum_i,j in_n[i][j] * wd[n][Y+4-S*i][X+4-S*j]
// i.e. the full output cropped by 4 pixels at the top and left (this design's
// choice of alignment; the paper does not state one).
module dclp
  import sr_pkg::*;
#(
  parameter int unsigned N = DC_N
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          in_valid,
  input  pos_t          in_pos,
  input  logic [DW-1:0] win [KCMAX][KCMAX][N],
  input  wgt_t          wd [N][KD][KD],
  input  act_t          bias,
  output logic          out_valid,
  output pos_t          out_pos,
  output act_t          out [LANES]
);
  localparam int unsigned NT   = KD*KD;
  localparam int unsigned LATN = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned QW   = PW + LATN;
  localparam int unsigned LW   = QW + $clog2(NT);
  localparam int unsigned LAT  = 1 + LATN + 1 + 2;

  logic [1:0] si;                       // scale index: S - 2
  always_comb si = 2'(cfg.scale - 3'd2);

  // ---- sparse input select and multiply, per input map
  prod_t prod [N][NT];
  for (genvar n = 0; n < N; n++) begin : g_n
    act_t a [NT];
    wgt_t wk [NT];
    for (genvar yd = 0; yd < KD; yd++) begin : g_y
      for (genvar xd = 0; xd < KD; xd++) begin : g_x
        act_t cand [3];
        for (genvar s = 0; s < 3; s++) begin : g_s
          localparam int unsigned YI = tdc_in(s+2, yd);
          localparam int unsigned XI = tdc_in(s+2, xd);
          assign cand[s] = act_t'(win[YI][XI][n]);
        end
        assign a[yd*KD+xd]  = (si < 2'd3) ? cand[si] : '0;
        assign wk[yd*KD+xd] = wd[n][yd][xd];
      end
    end
    mult_engine #(.NT(NT)) u_mul (.clk(clk), .a(a), .w(wk), .p(prod[n]));
  end

  // ---- adder tree over the input maps, per tap
  logic signed [QW-1:0] q [NT];
  for (genvar t = 0; t < NT; t++) begin : g_t
    prod_t col [N];
    always_comb for (int n = 0; n < N; n++) col[n] = prod[n][t];
    adder_tree #(.N(N), .IW(PW), .OW(QW)) u_fadd (.clk(clk), .in(col), .sum(q[t]));
  end

  // ---- output index: per scale, each lane adds the taps whose output index
  // is that lane (a fixed pattern per scale); the scale picks one pattern.
  logic signed [LW-1:0] ssum [3][LANES];
  for (genvar s = 0; s < 3; s++) begin : g_os
    localparam int unsigned SS = s + 2;
    always_comb
      for (int l = 0; l < LANES; l++) begin
        ssum[s][l] = '0;
        for (int t = 0; t < NT; t++)
          if (l < SS*SS && tdc_out(SS, t / KD) == l / SS && tdc_out(SS, t % KD) == l % SS)
            ssum[s][l] = ssum[s][l] + LW'(q[t]);
      end
  end

  logic signed [LW-1:0] lsum [LANES];
  always_ff @(posedge clk)
    for (int l = 0; l < LANES; l++) lsum[l] <= (si < 2'd3) ? ssum[si][l] : '0;

  // ---- bias and quantisation (no activation after the deconvolution)
  act_t lane_act [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_act
    prelu_engine #(.IW(LW)) u_act (.clk(clk), .act_en(1'b0), .sum(lsum[l]),
                                   .bias(bias), .slope('0), .out(lane_act[l]));
  end

  // ---- block position: the window's first column/line plus tdc_blk(S)
  pos_t blk;
  always_comb begin
    unique case (cfg.scale)
      3'd2:    blk = pos_back(in_pos, KCMAX - 1 - tdc_blk(2), cfg);
      3'd3:    blk = pos_back(in_pos, KCMAX - 1 - tdc_blk(3), cfg);
      default: blk = pos_back(in_pos, KCMAX - 1 - tdc_blk(4), cfg);
    endcase
  end

  logic [LAT-1:0] v_sr, a_sr;
  pos_t           p_sr [LAT];
  logic [LANES-1:0] lane_on;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0;
      a_sr <= '0;
      for (int i = 0; i < LAT; i++) p_sr[i] <= '0;
    end else begin
      v_sr[0] <= in_valid;
      p_sr[0] <= blk;
      a_sr[0] <= pos_active(blk, cfg);
      for (int i = 1; i < LAT; i++) begin
        v_sr[i] <= v_sr[i-1];
        p_sr[i] <= p_sr[i-1];
        a_sr[i] <= a_sr[i-1];
      end
    end
  end

  always_comb
    for (int l = 0; l < LANES; l++) lane_on[l] = (l < int'(cfg.scale) * int'(cfg.scale));

  assign out_valid = v_sr[LAT-1];
  assign out_pos   = p_sr[LAT-1];
  always_comb
    for (int l = 0; l < LANES; l++) out[l] = (a_sr[LAT-1] && lane_on[l]) ? lane_act[l] : '0;

  a_scale: assert property (@(posedge clk) disable iff (!rst_n)
                            in_valid |-> cfg.scale inside {3'd2, 3'd3, 3'd4});
endmodule
