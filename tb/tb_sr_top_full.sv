// tb_sr_top_full: one complete QHD frame through the super-resolution system
// with every parameter at its default.
//
// A 1440 x 640 LR frame (16 columns and 16 lines of blanking) is streamed at
// one pixel per clock with scale factor 2, giving the 2880 x 1280 HR frame
// of the panel the design targets. The test counts every HR pixel delivered
// (each exactly once), compares three bands of the frame (top, middle,
// bottom: four LR lines each, eight HR lines) with the reference model of
// sr_ref_pkg, and checks the frame rate: the last HR pixel must leave within
// 16 lines of blanking plus one line after the last raster position, i.e.
// the system consumes one LR pixel per clock without stalling.
module tb_sr_top_full;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  localparam int W = 1440, H = 640, HB = 16, VB = 16, S = 2;
  localparam int WT = W + HB, HT = H + VB;
  localparam int NBAND = 3;
  localparam int BAND_R0 [NBAND] = '{0, 318, 636};

  logic           clk = 0, rst_n = 0;
  logic           cfg_we = 0;
  cfg_t           cfg_in;
  logic           wb_we = 0;
  logic [WAW-1:0] wb_addr;
  wgt_t           wb_data;
  logic           in_valid = 0, in_sof = 0;
  logic [7:0]     in_r, in_g, in_b;
  logic           hr_valid, overrun;
  coord_t         hr_x, hr_y;
  logic [23:0]    hr_pix [LANES];

  sr_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int got [NBAND][4*S][S*W];
  longint delivered = 0, dup = 0;
  int row_cnt [S*H];
  longint cycles = 0, t_first = 0, t_last = 0;

  always @(posedge clk) begin
    cycles++;
    if (hr_valid) begin
      t_last = cycles;
      for (int j = 0; j < S*S; j++) begin
        int yy, xx;
        yy = int'(hr_y); xx = int'(hr_x) + j;
        if (yy < S*H && xx < S*W) begin
          delivered++;
          row_cnt[yy]++;
          for (int b = 0; b < NBAND; b++)
            if (yy >= S*BAND_R0[b] && yy < S*(BAND_R0[b] + 4))
              got[b][yy - S*BAND_R0[b]][xx] = int'(hr_pix[j]);
        end else dup++;
      end
    end
    if (overrun) failures++;
  end

  initial begin : watchdog
    repeat (1200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sr_model mdl;

  initial begin
    mdl = new(32'd777);
    mdl.W = W; mdl.H = H; mdl.S = S;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < WA_END; a++) begin
      @(negedge clk);
      wb_we = 1; wb_addr = WAW'(a); wb_data = wgt_t'(mdl.word(a));
    end
    @(negedge clk);
    wb_we  = 0;
    cfg_we = 1;
    cfg_in = '{scale: 3'(S), w_act: coord_t'(W), h_act: coord_t'(H),
               w_tot: coord_t'(WT), h_tot: coord_t'(HT)};
    @(negedge clk);
    cfg_we = 0;
    for (int y = 0; y < HT; y++)
      for (int x = 0; x < WT; x++) begin
        @(negedge clk);
        if (x == 0 && y == 0) t_first = cycles;
        in_valid = 1;
        in_sof   = (x == 0 && y == 0);
        in_r = (x < W && y < H) ? 8'(mdl.rgb(x, y, 0)) : 8'd0;
        in_g = (x < W && y < H) ? 8'(mdl.rgb(x, y, 1)) : 8'd0;
        in_b = (x < W && y < H) ? 8'(mdl.rgb(x, y, 2)) : 8'd0;
      end
    @(negedge clk);
    in_valid = 0;
    in_sof   = 0;
    repeat (2*WT) @(negedge clk);

    // every HR pixel exactly once
    checks++;
    if (delivered != longint'(S*S*W*H) || dup != 0) begin
      failures++;
      $display("delivered %0d HR pixels (%0d outside), expected %0d", delivered, dup, S*S*W*H);
    end
    for (int yy = 0; yy < S*H; yy++) begin
      checks++;
      if (row_cnt[yy] != S*W) begin
        failures++;
        if (failures < 10) $display("HR line %0d has %0d pixels", yy, row_cnt[yy]);
      end
    end
    // one LR pixel per clock: output done shortly after the input frame
    checks++;
    if (t_last - t_first > longint'(WT*HT + WT)) begin
      failures++;
      $display("frame took %0d clocks, budget %0d", t_last - t_first, WT*HT + WT);
    end
    // content of three bands
    for (int b = 0; b < NBAND; b++) begin
      mdl.run_band(BAND_R0[b], BAND_R0[b] + 3);
      for (int yy = S*BAND_R0[b]; yy < S*(BAND_R0[b] + 4); yy++)
        for (int xx = 0; xx < S*W; xx++) begin
          int exp_v;
          exp_v = mdl.hr_rgb(yy, xx);
          checks++;
          if (got[b][yy - S*BAND_R0[b]][xx] != exp_v) begin
            failures++;
            if (failures < 10) $display("HR pixel (%0d,%0d) = %06h, expected %06h",
                                        yy, xx, got[b][yy - S*BAND_R0[b]][xx], exp_v);
          end
        end
    end
    $display("frame: %0d clocks from first LR pixel to last HR pixel (%0d raster positions)",
             t_last - t_first, WT*HT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
