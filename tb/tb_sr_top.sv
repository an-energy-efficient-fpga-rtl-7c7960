// tb_sr_top: end-to-end test of the super-resolution system on small frames.
//
// Loads a pseudo-random network into the weight buffer, then streams
// 12 x 8 LR frames (12 columns and 12 lines of blanking) at scale 2, 3 and
// 4, two frames per scale, with random gaps in in_valid. Every HR pixel of
// every frame is compared with the frame-based reference model of
// sr_ref_pkg. Also counted, and failed if they never happen: each scale
// factor in use, gaps in the input stream, PReLU neurons on the negative
// branch, and checked pixels in the border blocks that rely on zero padding.
module tb_sr_top;
  import sr_pkg::*;
  import sr_ref_pkg::*;

  localparam int W = 12, H = 8, HB = 12, VB = 12;
  localparam int WT = W + HB, HT = H + VB;

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
  int cur_s = 2;
  int got [4*H][4*W];
  int seen [4*H][4*W];
  int dup = 0;
  int scale_frames [5];
  int gaps = 0, border_checks = 0;
  longint cycles = 0;

  always @(posedge clk) begin
    cycles++;
    if (hr_valid)
      for (int j = 0; j < cur_s*cur_s; j++) begin
        int yy, xx;
        yy = int'(hr_y); xx = int'(hr_x) + j;
        if (yy < cur_s*H && xx < cur_s*W) begin
          if (seen[yy][xx] != 0) dup++;
          seen[yy][xx] = 1;
          got[yy][xx]  = int'(hr_pix[j]);
        end else dup++;
      end
    if (overrun) failures++;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  sr_model mdl;

  task automatic load_weights();
    for (int a = 0; a < WA_END; a++) begin
      @(negedge clk);
      wb_we   = 1;
      wb_addr = WAW'(a);
      wb_data = wgt_t'(mdl.word(a));
    end
    @(negedge clk);
    wb_we = 0;
  endtask

  task automatic set_cfg(int s);
    @(negedge clk);
    cfg_we = 1;
    cfg_in = '{scale: 3'(s), w_act: coord_t'(W), h_act: coord_t'(H),
               w_tot: coord_t'(WT), h_tot: coord_t'(HT)};
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic stream_frame(int fr);
    for (int y = 0; y < HT; y++)
      for (int x = 0; x < WT; x++) begin
        @(negedge clk);
        while (($urandom % 4) == 0) begin
          in_valid = 0;
          gaps++;
          @(negedge clk);
        end
        in_valid = 1;
        in_sof   = (x == 0 && y == 0);
        if (x < W && y < H) begin
          in_r = 8'(mdl.rgb(x, y, 0));
          in_g = 8'(mdl.rgb(x, y, 1));
          in_b = 8'(mdl.rgb(x, y, 2));
        end else begin
          in_r = 8'($urandom); in_g = 8'($urandom); in_b = 8'($urandom);
        end
      end
    @(negedge clk);
    in_valid = 0;
    in_sof   = 0;
    repeat (4*W + 50) @(negedge clk);   // let the last HR lines leave
  endtask

  initial begin
    mdl = new(32'd12345);
    mdl.W = W; mdl.H = H;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();
    for (int s = 2; s <= 4; s++) begin
      mdl.S = s;
      mdl.run_band(0, H-1);
      set_cfg(s);
      for (int fr = 0; fr < 2; fr++) begin
        for (int yy = 0; yy < 4*H; yy++)
          for (int xx = 0; xx < 4*W; xx++) seen[yy][xx] = 0;
        cur_s = s;
        stream_frame(fr);
        scale_frames[s]++;
        for (int yy = 0; yy < s*H; yy++)
          for (int xx = 0; xx < s*W; xx++) begin
            int exp_v;
            exp_v = mdl.hr_rgb(yy, xx);
            checks++;
            if (yy < s || yy >= s*(H-1) || xx < s || xx >= s*(W-1)) border_checks++;
            if (seen[yy][xx] == 0) begin
              failures++;
              if (failures < 10) $display("S=%0d frame %0d: HR pixel (%0d,%0d) missing", s, fr, yy, xx);
            end else if (got[yy][xx] != exp_v) begin
              failures++;
              if (failures < 10)
                $display("S=%0d frame %0d: HR pixel (%0d,%0d) = %06h, expected %06h",
                         s, fr, yy, xx, got[yy][xx], exp_v);
            end
          end
      end
    end
    checks++;
    if (dup != 0) begin
      failures++;
      $display("%0d HR pixels delivered twice or outside the frame", dup);
    end
    for (int s = 2; s <= 4; s++) begin
      checks++;
      if (scale_frames[s] == 0) begin failures++; $display("scale %0d never ran", s); end
    end
    checks++; if (gaps == 0)            begin failures++; $display("no input gaps"); end
    checks++; if (mdl.neg_prelu == 0)   begin failures++; $display("PReLU negative branch never used"); end
    checks++; if (border_checks == 0)   begin failures++; $display("no border pixels checked"); end
    $display("mechanisms: frames S2=%0d S3=%0d S4=%0d, input gaps=%0d, negative PReLU=%0d, border pixels=%0d, cycles=%0d",
             scale_frames[2], scale_frames[3], scale_frames[4], gaps, mdl.neg_prelu, border_checks, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
