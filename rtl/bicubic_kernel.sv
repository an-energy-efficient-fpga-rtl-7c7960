// bicubic_kernel: bicubic upscaling of the two chroma channels by S.
//
// The paper upscales Cb and Cr with bicubic interpolation instead of the CNN
// and shows a line buffer, a bicubic kernel and a second line buffer; it
// gives no further detail. This kernel takes a 4 x 4 window of each chroma
// channel from a line buffer and produces, per LR pixel, the S x S HR chroma
// samples at fractional offsets (yo/S, xo/S) from that pixel, using the
// separable Keys cubic with a = -0.5 and 7-bit coefficients (sr_pkg::
// bicubic_coef). Chroma enters as a signed offset from 128, so the zeros
// that blanking puts around the frame act as neutral grey.
//
// Interface: win[r][c][ch] (ch 0 = Cb, 1 = Cr) from line_buffer, newest
// pixel at [3][3]; the block is for the LR pixel at win[1][1], two columns
// and two lines before the newest. cb[yo*S+xo], cr[...] are 8-bit HR chroma;
// lanes from S*S up are 128. One clock of latency.
module bicubic_kernel
  import sr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  cfg_t       cfg,
  input  logic       in_valid,
  input  pos_t       in_pos,
  input  logic [7:0] win [4][4][2],
  output logic       out_valid,
  output logic       out_active,
  output pos_t       out_pos,
  output logic [7:0] cb [LANES],
  output logic [7:0] cr [LANES]
);
  // coefficient table: [scale-2][phase][tap]
  logic signed [8:0] coef [3][SMAX][4];
  for (genvar s = 0; s < 3; s++) begin : g_s
    for (genvar p = 0; p < SMAX; p++) begin : g_p
      for (genvar k = 0; k < 4; k++) begin : g_k
        localparam int C = (p < s + 2) ? bicubic_coef(s + 2, p, k) : 0;
        assign coef[s][p][k] = 9'(C);
      end
    end
  end

  logic [1:0] si;
  always_comb si = 2'(cfg.scale - 3'd2);

  function automatic logic [7:0] to_u8(int v);
    int r;
    r = ((v + (1 << (2*BC_FRAC - 1))) >>> (2*BC_FRAC)) + 128;
    if (r < 0)   return 8'd0;
    if (r > 255) return 8'd255;
    return 8'(r);
  endfunction

  logic [7:0] cb_c [LANES];
  logic [7:0] cr_c [LANES];
  always_comb begin
    int yo, xo, acc0, acc1, sc, cw;
    sc = int'(cfg.scale);
    for (int l = 0; l < LANES; l++) begin
      yo   = (sc > 0) ? (l / sc) % SMAX : 0;
      xo   = (sc > 0) ? l % sc : 0;
      acc0 = 0;
      acc1 = 0;
      cw   = 0;
      if (l < sc*sc && si < 2'd3) begin
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++) begin
            cw   = int'(coef[si][yo][r]) * int'(coef[si][xo][c]);
            acc0 = acc0 + cw * int'($signed(win[r][c][0]));
            acc1 = acc1 + cw * int'($signed(win[r][c][1]));
          end
      end
      cb_c[l] = to_u8(acc0);
      cr_c[l] = to_u8(acc1);
    end
  end

  pos_t ctr;
  assign ctr = pos_back(in_pos, 2, cfg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_active <= 1'b0;
      out_pos    <= '0;
      for (int l = 0; l < LANES; l++) begin
        cb[l] <= 8'd128;
        cr[l] <= 8'd128;
      end
    end else begin
      out_valid  <= in_valid;
      out_active <= pos_active(ctr, cfg);
      out_pos    <= ctr;
      cb         <= cb_c;
      cr         <= cr_c;
    end
  end
endmodule
