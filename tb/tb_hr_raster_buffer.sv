// tb_hr_raster_buffer: writes four LR lines of random S x S blocks (with
// gaps) at scale 2, 3 and 4 and rebuilds the HR image from the raster
// output; every HR pixel must arrive exactly once with the value of its
// block lane, and a line's read-out must take S*ceil(w_act/S) clocks. The
// line width, 10, is not a multiple of 3 or 4, so the last clock of a line
// is partly filled at those scales.
module tb_hr_raster_buffer;
  import sr_pkg::*;
  localparam int WMAX = 16, W = 10, LINES = 4;
  logic clk = 0, rst_n = 0, blk_valid = 0, out_valid, overrun;
  cfg_t cfg;
  pos_t blk_pos;
  logic [23:0] blk_pix [LANES];
  coord_t out_x, out_y;
  logic [23:0] out_pix [LANES];
  hr_raster_buffer #(.WMAX(WMAX)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int img [4*LINES][4*W+4];
  int got [4*LINES][4*W];
  int cnt [4*LINES][4*W];
  int cur_s = 2, busy_cycles = 0;

  always @(posedge clk) begin
    if (out_valid) begin
      busy_cycles++;
      for (int j = 0; j < cur_s*cur_s; j++)
        if (int'(out_x) + j < cur_s*W) begin
          got[out_y][int'(out_x) + j] = int'(out_pix[j]);
          cnt[out_y][int'(out_x) + j]++;
        end else if (out_pix[j] != '0) failures++;
    end
    if (overrun) failures++;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 2; s <= 4; s++) begin
      cur_s = s;
      busy_cycles = 0;
      cfg = '{scale: 3'(s), w_act: coord_t'(W), h_act: coord_t'(LINES), w_tot: 12'd16, h_tot: 12'd6};
      foreach (cnt[a, b]) cnt[a][b] = 0;
      for (int ly = 0; ly < LINES; ly++)
        for (int lx = 0; lx < 16; lx++) begin
          @(negedge clk);
          while ($urandom % 4 == 0) begin blk_valid = 0; @(negedge clk); end
          blk_valid = lx < W;
          blk_pos = '{x: coord_t'(lx), y: coord_t'(ly)};
          for (int l = 0; l < LANES; l++) blk_pix[l] = 24'($urandom);
          if (lx < W)
            for (int yo = 0; yo < s; yo++)
              for (int xo = 0; xo < s; xo++)
                img[ly*s + yo][lx*s + xo] = int'(blk_pix[yo*s + xo]);
        end
      @(negedge clk); blk_valid = 0;
      repeat (3*W) @(negedge clk);
      for (int yy = 0; yy < s*LINES; yy++)
        for (int xx = 0; xx < s*W; xx++) begin
          checks++;
          if (cnt[yy][xx] != 1 || got[yy][xx] != img[yy][xx]) begin
            failures++;
            if (failures < 5) $display("S=%0d HR (%0d,%0d): %0d times, %06h exp %06h",
                                       s, yy, xx, cnt[yy][xx], got[yy][xx], img[yy][xx]);
          end
        end
      checks++;
      if (busy_cycles != LINES*s*((W + s - 1)/s)) begin
        failures++;
        $display("S=%0d read-out took %0d clocks, expected %0d", s, busy_cycles, LINES*s*((W + s - 1)/s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
