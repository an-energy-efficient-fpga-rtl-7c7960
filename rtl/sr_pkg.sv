// sr_pkg: types, constants and constant functions shared by the Light FSRCNN
// super-resolution datapath.
//
// Number formats. Activations, weights, biases and PReLU slopes are 13-bit
// two's-complement fixed-point numbers, the width the design is quantised to.
// Activations carry 8 fraction bits (an 8-bit luma code y is the activation
// value y/256), weights and PReLU slopes carry 10 fraction bits. The split of
// the 13 bits into integer and fraction bits is this design's choice.
// Products and sums inside one neuron are kept at full width and quantised
// once, after the activation, so results do not depend on the order in which
// an adder tree adds.
//
// Network (Light FSRCNN (x,y,z) = (25,5,1) with a 7x7 deconvolution):
//   Conv(5,25,1) -> Conv(1,5,25) -> Conv(3,5,5) -> Conv(1,25,5) -> DeConv(7,1,25)
// The deconvolution is run as a convolution with Kc x Kc windows and S*S
// outputs (TDC method); the constant functions below give the inverse
// coefficient mapping that places each deconvolution weight on one input of
// the window and one output of the S x S block.
//
// Raster positions. Every pixel travels with its (x, y) position in the
// display raster including blanking (w_tot x h_tot). Positions outside the
// active w_act x h_act area carry zero, which gives the convolutions their
// zero padding for free.
package sr_pkg;

  // ---------------------------------------------------------------- formats
  localparam int unsigned DW     = 13;   // activation / weight width
  localparam int unsigned A_FRAC = 8;    // activation fraction bits
  localparam int unsigned W_FRAC = 10;   // weight / slope fraction bits
  localparam int unsigned PW     = 2*DW; // full product width

  typedef logic signed [DW-1:0] act_t;
  typedef logic signed [DW-1:0] wgt_t;
  typedef logic signed [PW-1:0] prod_t;

  localparam int signed ACT_MAX = (1 <<< (DW-1)) - 1;
  localparam int signed ACT_MIN = -(1 <<< (DW-1));

  // ---------------------------------------------------------------- network
  localparam int unsigned L1_K = 5, L1_M = 25, L1_N = 1;   // Conv(5,x,1)
  localparam int unsigned L2_K = 1, L2_M = 5,  L2_N = 25;  // Conv(1,y,x)
  localparam int unsigned L3_K = 3, L3_M = 5,  L3_N = 5;   // Conv(3,y,y), z = 1
  localparam int unsigned L4_K = 1, L4_M = 25, L4_N = 5;   // Conv(1,x,y)
  localparam int unsigned KD   = 7, DC_N = 25;             // DeConv(7,1,x)
  localparam int unsigned SMAX  = 4;                        // largest scale factor
  localparam int unsigned LANES = SMAX*SMAX;                // HR pixels per LR pixel, max
  localparam int unsigned KCMAX = 4;                        // largest TDC window (S = 2)
  localparam int unsigned DC_PAD = 4;                       // HR crop of the full deconvolution

  // ---------------------------------------------------------------- raster
  localparam int unsigned XW = 12;
  typedef logic [XW-1:0] coord_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
  } pos_t;

  typedef struct packed {
    logic [2:0] scale;   // 2, 3 or 4
    coord_t     w_act;   // active LR pixels per line
    coord_t     h_act;   // active LR lines per frame
    coord_t     w_tot;   // raster positions per line, blanking included
    coord_t     h_tot;   // raster lines per frame, blanking included
  } cfg_t;

  // Position d columns and d lines before p in the raster (wraps).
  function automatic pos_t pos_back(pos_t p, int unsigned d, cfg_t c);
    pos_t r;
    int   x, y;
    x = int'(p.x) - int'(d);
    y = int'(p.y) - int'(d);
    if (x < 0) begin
      x = x + int'(c.w_tot);
      y = y - 1;
    end
    if (y < 0) y = y + int'(c.h_tot);
    r.x = coord_t'(x);
    r.y = coord_t'(y);
    return r;
  endfunction

  function automatic logic pos_active(pos_t p, cfg_t c);
    return (p.x < c.w_act) && (p.y < c.h_act);
  endfunction

  // Saturate a wide signed value to the activation range.
  function automatic act_t sat_act(longint v);
    if (v > longint'(ACT_MAX)) return act_t'(ACT_MAX);
    if (v < longint'(ACT_MIN)) return act_t'(ACT_MIN);
    return act_t'(v);
  endfunction

  // ---------------------------------------------------------------- TDC
  // delta = 1 when the fraction of N_O = floor(KD/2)/S is >= 0.5 (Eq. 2, 4).
  function automatic int unsigned tdc_delta(int unsigned s);
    return (2 * ((KD/2) % s) >= s) ? 1 : 0;
  endfunction

  // Kc of Eq. (2).
  function automatic int unsigned tdc_kc(int unsigned s);
    if (tdc_delta(s) == 0) return 2*((KD/2)/s) + 1;
    return 2*(((KD/2) + s - 1)/s);
  endfunction

  // Inverse of Eqs. (4)-(5): deconvolution tap d sits at window input
  // tdc_in(s,d) and feeds block output tdc_out(s,d).
  //   d = KD + delta - S*i - (S - o)   =>   S*(i+1) - o = KD + delta - d
  function automatic int unsigned tdc_in(int unsigned s, int unsigned d);
    int unsigned q;
    q = KD + tdc_delta(s) - d;
    return (q + s - 1)/s - 1;
  endfunction

  function automatic int unsigned tdc_out(int unsigned s, int unsigned d);
    int unsigned q;
    q = KD + tdc_delta(s) - d;
    return s*((q + s - 1)/s) - q;
  endfunction

  // LR offset of the output block against the window's first column, chosen
  // so that the HR image is the full deconvolution cropped by DC_PAD.
  function automatic int unsigned tdc_blk(int unsigned s);
    return (KD + tdc_delta(s) - s - DC_PAD)/s;
  endfunction

  // ---------------------------------------------------------------- bicubic
  localparam int unsigned BC_FRAC = 7;  // coefficient fraction bits

  // Keys cubic (a = -0.5) weight of tap k (0..3 for offsets -1..2) at phase p/s,
  // rounded to BC_FRAC fraction bits.
  function automatic int bicubic_coef(int unsigned s, int unsigned p, int unsigned k);
    int num, den, ss, pp;
    ss = int'(s); pp = int'(p);
    case (k)
      0:       num = -pp*pp*pp + 2*pp*pp*ss - pp*ss*ss;
      1:       num = 3*pp*pp*pp - 5*pp*pp*ss + 2*ss*ss*ss;
      2:       num = -3*pp*pp*pp + 4*pp*pp*ss + pp*ss*ss;
      default: num = pp*pp*pp - pp*pp*ss;
    endcase
    den = 2*ss*ss*ss;
    if (num >= 0) return (num*(1 << BC_FRAC) + den/2)/den;
    return -((-num*(1 << BC_FRAC) + den/2)/den);
  endfunction

  // ---------------------------------------------------------------- weights
  // Word addresses of the weight buffer load port.
  localparam int unsigned WA_L1 = 0;                              // [m][ky][kx]
  localparam int unsigned WA_L2 = WA_L1 + L1_M*L1_N*L1_K*L1_K;    // [m][n]
  localparam int unsigned WA_L3 = WA_L2 + L2_M*L2_N;              // [m][n][ky][kx]
  localparam int unsigned WA_L4 = WA_L3 + L3_M*L3_N*L3_K*L3_K;    // [m][n]
  localparam int unsigned WA_B1 = WA_L4 + L4_M*L4_N;              // biases
  localparam int unsigned WA_B2 = WA_B1 + L1_M;
  localparam int unsigned WA_B3 = WA_B2 + L2_M;
  localparam int unsigned WA_B4 = WA_B3 + L3_M;
  localparam int unsigned WA_P1 = WA_B4 + L4_M;                   // PReLU slopes
  localparam int unsigned WA_P2 = WA_P1 + L1_M;
  localparam int unsigned WA_P3 = WA_P2 + L2_M;
  localparam int unsigned WA_P4 = WA_P3 + L3_M;
  localparam int unsigned WA_DB = WA_P4 + L4_M;                   // deconv bias, per scale
  localparam int unsigned WA_DW = WA_DB + 3;                      // deconv weights [s-2][n][yd][xd]
  localparam int unsigned DW_SET = DC_N*KD*KD;
  localparam int unsigned WA_END = WA_DW + 3*DW_SET;
  localparam int unsigned WAW = $clog2(WA_END);

endpackage
