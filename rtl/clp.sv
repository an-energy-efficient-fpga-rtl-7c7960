// clp: convolutional layer processor with every convolution loop unrolled.
//
// One K x K x N input window enters per clock and one pixel of all M output
// feature maps leaves per clock, so the layer keeps pace with the pixel
// stream and needs no frame buffer (computation to transmission ratio of 1:
// Tm = M, Tn = N, Tk = K). Each of the M x N processing elements is a
// multiply engine (K*K multipliers) followed by a kernel adder tree; for each
// output map an adder tree over the N input maps and a PReLU activation
// engine finish the neuron. This structure follows the paper.
//
// Interface: win is the window of line_buffer (win[r][c][n], newest pixel at
// [K-1][K-1]); w[m][n][ky][kx], bias[m] and slope[m] come from the weight
// buffer. out_pos is the window centre, (K-1)/2 columns and lines before
// the newest pixel; outputs at positions outside the active area are forced
// to zero so the next layer sees zero padding.
// Latency: 1 (multiply) + ceil(log2 K*K) + ceil(log2 N) (adder trees, at
// least 1 each) + 2 (activation) clocks.
module clp
  import sr_pkg::*;
#(
  parameter int unsigned K = 3,
  parameter int unsigned M = 5,
  parameter int unsigned N = 5
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cfg_t          cfg,
  input  logic          in_valid,
  input  pos_t          in_pos,
  input  logic [DW-1:0] win [K][K][N],
  input  wgt_t          w [M][N][K][K],
  input  act_t          bias [M],
  input  wgt_t          slope [M],
  output logic          out_valid,
  output pos_t          out_pos,
  output act_t          out [M]
);
  localparam int unsigned KK   = K*K;
  localparam int unsigned KW   = PW + ((KK > 1) ? $clog2(KK) : 1);
  localparam int unsigned NW   = KW + ((N > 1) ? $clog2(N) : 1);
  localparam int unsigned LATK = (KK > 1) ? $clog2(KK) : 1;
  localparam int unsigned LATN = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned LAT  = 1 + LATK + LATN + 2;

  logic signed [NW-1:0] fsum [M];
  act_t                 act  [M];

  for (genvar m = 0; m < M; m++) begin : g_m
    logic signed [KW-1:0] ksum [N];
    for (genvar n = 0; n < N; n++) begin : g_pe
      act_t  a [KK];
      wgt_t  wk [KK];
      prod_t p [KK];
      always_comb
        for (int i = 0; i < KK; i++) begin
          a[i]  = act_t'(win[i / K][i % K][n]);
          wk[i] = w[m][n][i / K][i % K];
        end
      mult_engine #(.NT(KK)) u_mul (.clk(clk), .a(a), .w(wk), .p(p));
      adder_tree #(.N(KK), .IW(PW), .OW(KW)) u_kadd (.clk(clk), .in(p), .sum(ksum[n]));
    end
    adder_tree #(.N(N), .IW(KW), .OW(NW)) u_fadd (.clk(clk), .in(ksum), .sum(fsum[m]));
    prelu_engine #(.IW(NW)) u_act (.clk(clk), .act_en(1'b1), .sum(fsum[m]),
                                   .bias(bias[m]), .slope(slope[m]), .out(act[m]));
  end

  // position and validity travel beside the arithmetic
  logic [LAT-1:0] v_sr;
  pos_t           p_sr [LAT];
  logic [LAT-1:0] a_sr;
  pos_t           ctr;
  assign ctr = pos_back(in_pos, (K-1)/2, cfg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0;
      a_sr <= '0;
      for (int i = 0; i < LAT; i++) p_sr[i] <= '0;
    end else begin
      v_sr[0] <= in_valid;
      p_sr[0] <= ctr;
      a_sr[0] <= pos_active(ctr, cfg);
      for (int i = 1; i < LAT; i++) begin
        v_sr[i] <= v_sr[i-1];
        p_sr[i] <= p_sr[i-1];
        a_sr[i] <= a_sr[i-1];
      end
    end
  end

  assign out_valid = v_sr[LAT-1];
  assign out_pos   = p_sr[LAT-1];
  always_comb
    for (int m = 0; m < M; m++) out[m] = a_sr[LAT-1] ? act[m] : '0;
endmodule
