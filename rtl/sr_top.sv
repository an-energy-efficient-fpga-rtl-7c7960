// sr_top: Light FSRCNN super-resolution system, LR RGB pixel stream in, HR
// RGB pixel stream out, with every intermediate feature map kept on chip.
//
// Dataflow (one LR pixel per clock through every stage, no frame buffer):
//   controller -> RGB to YCbCr
//   Y:     line buffer 5 -> combined CLP1 Conv(5,25,1)+Conv(1,5,25)
//          -> line buffer 3 -> combined CLP2 Conv(3,5,5)+Conv(1,25,5)
//          -> line buffer 4 -> DCLP DeConv(7,1,25) run as a TDC convolution,
//             giving S x S HR luma pixels per LR pixel
//   Cb/Cr: line buffer 4 -> bicubic kernel -> chroma buffer
//   HR luma + chroma -> YCbCr to RGB (S*S converters) -> HR output line buffer
// The weight buffer feeds all processors; the deconvolution weight set
// follows the configured scale factor (2, 3 or 4).
//
// The structure (stages, combined CLPs, line buffers, weight buffer, bicubic
// chroma path, layer shapes, 13-bit data) follows the paper. Raster handling,
// blanking-based zero padding, number formats, colour coefficients, the
// alignment of the HR grid and the output ordering are this design's.
//
// Interface. Load the weights (wb_*) and the configuration (cfg_*) first.
// Then stream the LR frame in raster order, blanking included: in_valid
// marks a raster position, in_sof its first position of a frame. Blanking
// must be at least 8 positions per line and 8 lines per frame so that every
// window sees zero padding and the pipeline drains before the next frame; a
// configuration change applies from the next frame on. in_valid may have
// gaps. HR pixels leave as hr_pix[j] = pixel (hr_y, hr_x + j), j < S*S,
// each lane {R, G, B}; the S HR lines of an LR line leave after the luma of its LR line
// is complete, about six LR lines after that line entered.
module sr_top
  import sr_pkg::*;
#(
  parameter int unsigned WMAX = 1456   // raster positions per LR line, max (1440 active + 16 blanking)
) (
  input  logic           clk,
  input  logic           rst_n,
  // configuration and weight loading
  input  logic           cfg_we,
  input  cfg_t           cfg_in,
  input  logic           wb_we,
  input  logic [WAW-1:0] wb_addr,
  input  wgt_t           wb_data,
  // LR input from the display driver
  input  logic           in_valid,
  input  logic           in_sof,
  input  logic [7:0]     in_r,
  input  logic [7:0]     in_g,
  input  logic [7:0]     in_b,
  // HR output to the panel
  output logic           hr_valid,
  output coord_t         hr_x,
  output coord_t         hr_y,
  output logic [23:0]    hr_pix [LANES],
  output logic           overrun
);
  // ------------------------------------------------------------ controller
  cfg_t cfg;
  logic c_valid, c_active, frame_start;
  pos_t c_pos;
  sr_controller u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_in, .in_valid, .in_sof,
    .out_valid(c_valid), .out_pos(c_pos), .out_active(c_active),
    .cfg, .frame_start);

  logic       yc_valid;
  logic [7:0] yy, cb, cr;
  rgb2ycbcr u_rgb2yc (
    .clk, .rst_n, .in_valid, .r(in_r), .g(in_g), .b(in_b),
    .out_valid(yc_valid), .y(yy), .cb(cb), .cr(cr));

  // ------------------------------------------------------------ weights
  wgt_t w1 [L1_M][L1_N][L1_K][L1_K];
  act_t b1 [L1_M];
  wgt_t p1 [L1_M];
  wgt_t w2 [L2_M][L2_N][1][1];
  act_t b2 [L2_M];
  wgt_t p2 [L2_M];
  wgt_t w3 [L3_M][L3_N][L3_K][L3_K];
  act_t b3 [L3_M];
  wgt_t p3 [L3_M];
  wgt_t w4 [L4_M][L4_N][1][1];
  act_t b4 [L4_M];
  wgt_t p4 [L4_M];
  wgt_t wd [DC_N][KD][KD];
  act_t dbias;

  weight_buffer u_wbuf (
    .clk, .we(wb_we), .waddr(wb_addr), .wdata(wb_data), .cfg_scale(cfg.scale),
    .w1, .b1, .p1, .w2, .b2, .p2, .w3, .b3, .p3, .w4, .b4, .p4, .wd, .dbias);

  // ------------------------------------------------------------ luma path
  logic [DW-1:0] y_in [1];
  assign y_in[0] = c_active ? DW'(yy) : '0;   // code y is the activation y/256

  logic          lb1_v;
  pos_t          lb1_p;
  logic [DW-1:0] lb1_w [L1_K][L1_K][L1_N];
  line_buffer #(.K(L1_K), .C(L1_N), .DWD(DW), .WMAX(WMAX)) u_lb1 (
    .clk, .rst_n, .in_valid(c_valid), .in_pos(c_pos), .din(y_in),
    .out_valid(lb1_v), .out_pos(lb1_p), .win(lb1_w));

  logic c1_v;
  pos_t c1_p;
  act_t c1_o [L2_M];
  combined_clp #(.K(L1_K), .N(L1_N), .M1(L1_M), .M2(L2_M)) u_cclp1 (
    .clk, .rst_n, .cfg, .in_valid(lb1_v), .in_pos(lb1_p), .win(lb1_w),
    .w1(w1), .bias1(b1), .slope1(p1), .w2(w2), .bias2(b2), .slope2(p2),
    .out_valid(c1_v), .out_pos(c1_p), .out(c1_o));

  logic [DW-1:0] c1_d [L2_M];
  always_comb for (int i = 0; i < L2_M; i++) c1_d[i] = c1_o[i];

  logic          lb2_v;
  pos_t          lb2_p;
  logic [DW-1:0] lb2_w [L3_K][L3_K][L3_N];
  line_buffer #(.K(L3_K), .C(L3_N), .DWD(DW), .WMAX(WMAX)) u_lb2 (
    .clk, .rst_n, .in_valid(c1_v), .in_pos(c1_p), .din(c1_d),
    .out_valid(lb2_v), .out_pos(lb2_p), .win(lb2_w));

  logic c2_v;
  pos_t c2_p;
  act_t c2_o [L4_M];
  combined_clp #(.K(L3_K), .N(L3_N), .M1(L3_M), .M2(L4_M)) u_cclp2 (
    .clk, .rst_n, .cfg, .in_valid(lb2_v), .in_pos(lb2_p), .win(lb2_w),
    .w1(w3), .bias1(b3), .slope1(p3), .w2(w4), .bias2(b4), .slope2(p4),
    .out_valid(c2_v), .out_pos(c2_p), .out(c2_o));

  logic [DW-1:0] c2_d [L4_M];
  always_comb for (int i = 0; i < L4_M; i++) c2_d[i] = c2_o[i];

  logic          lb3_v;
  pos_t          lb3_p;
  logic [DW-1:0] lb3_w [KCMAX][KCMAX][DC_N];
  line_buffer #(.K(KCMAX), .C(DC_N), .DWD(DW), .WMAX(WMAX)) u_lb3 (
    .clk, .rst_n, .in_valid(c2_v), .in_pos(c2_p), .din(c2_d),
    .out_valid(lb3_v), .out_pos(lb3_p), .win(lb3_w));

  logic dc_v;
  pos_t dc_p;
  act_t dc_o [LANES];
  dclp #(.N(DC_N)) u_dclp (
    .clk, .rst_n, .cfg, .in_valid(lb3_v), .in_pos(lb3_p), .win(lb3_w),
    .wd(wd), .bias(dbias), .out_valid(dc_v), .out_pos(dc_p), .out(dc_o));

  // ------------------------------------------------------------ chroma path
  logic [7:0] c_in [2];
  assign c_in[0] = c_active ? cb - 8'd128 : '0;   // signed offset from grey
  assign c_in[1] = c_active ? cr - 8'd128 : '0;

  logic       lbc_v;
  pos_t       lbc_p;
  logic [7:0] lbc_w [4][4][2];
  line_buffer #(.K(4), .C(2), .DWD(8), .WMAX(WMAX)) u_lbc (
    .clk, .rst_n, .in_valid(c_valid), .in_pos(c_pos), .din(c_in),
    .out_valid(lbc_v), .out_pos(lbc_p), .win(lbc_w));

  logic       bc_v, bc_a;
  pos_t       bc_p;
  logic [7:0] bc_cb [LANES];
  logic [7:0] bc_cr [LANES];
  bicubic_kernel u_bicubic (
    .clk, .rst_n, .cfg, .in_valid(lbc_v), .in_pos(lbc_p), .win(lbc_w),
    .out_valid(bc_v), .out_active(bc_a), .out_pos(bc_p), .cb(bc_cb), .cr(bc_cr));

  logic       dc_act;
  assign dc_act = dc_v && pos_active(dc_p, cfg);

  logic [7:0] hr_cb [LANES];
  logic [7:0] hr_cr [LANES];
  chroma_buffer #(.WMAX(WMAX), .NR(8)) u_cbuf (
    .clk, .wr_en(bc_v && bc_a), .wr_pos(bc_p), .wr_cb(bc_cb), .wr_cr(bc_cr),
    .rd_en(dc_act), .rd_pos(dc_p), .rd_cb(hr_cb), .rd_cr(hr_cr));

  // ------------------------------------------------------------ merge
  logic       m_v;
  pos_t       m_p;
  logic [7:0] m_y [LANES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_v <= 1'b0;
      m_p <= '0;
      for (int l = 0; l < LANES; l++) m_y[l] <= '0;
    end else begin
      m_v <= dc_act;
      m_p <= dc_p;
      for (int l = 0; l < LANES; l++)
        m_y[l] <= (dc_o[l] < 0) ? 8'd0 : (dc_o[l] > 13'sd255) ? 8'd255 : 8'(dc_o[l]);
    end
  end

  logic [23:0] m_rgb [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_yc2rgb
    ycbcr2rgb u_yc2rgb (.y(m_y[l]), .cb(hr_cb[l]), .cr(hr_cr[l]),
                        .r(m_rgb[l][23:16]), .g(m_rgb[l][15:8]), .b(m_rgb[l][7:0]));
  end

  hr_raster_buffer #(.WMAX(WMAX)) u_hrbuf (
    .clk, .rst_n, .cfg, .blk_valid(m_v), .blk_pos(m_p), .blk_pix(m_rgb),
    .out_valid(hr_valid), .out_x(hr_x), .out_y(hr_y), .out_pix(hr_pix), .overrun);

  // chroma of a block must be written before its luma arrives: the chroma
  // path is shorter by several lines
  logic unused;
  assign unused = ^{frame_start, yc_valid};
endmodule
