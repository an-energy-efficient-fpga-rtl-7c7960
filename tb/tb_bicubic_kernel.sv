// tb_bicubic_kernel: random signed chroma windows at random positions, at
// scale 2, 3 and 4. Each HR chroma lane is compared with bicubic
// interpolation computed here from the Keys cubic (a = -0.5) in real
// arithmetic, rounded to 7-bit weights; block position and active flag are
// checked as well.
module tb_bicubic_kernel;
  import sr_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, out_active;
  cfg_t cfg;
  pos_t in_pos, out_pos;
  logic [7:0] win [4][4][2];
  logic [7:0] cb [LANES];
  logic [7:0] cr [LANES];
  bicubic_kernel dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic int coef(int s, int p, int k);
    real t, w;
    t = real'(p) / real'(s);
    case (k)
      0: w = -0.5*t*t*t + t*t - 0.5*t;
      1: w =  1.5*t*t*t - 2.5*t*t + 1.0;
      2: w = -1.5*t*t*t + 2.0*t*t + 0.5*t;
      default: w = 0.5*t*t*t - 0.5*t*t;
    endcase
    w = w * 128.0;
    return (w >= 0.0) ? int'($floor(w + 0.5)) : -int'($floor(-w + 0.5));
  endfunction

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
      cfg = '{scale: 3'(s), w_act: 12'd6, h_act: 12'd4, w_tot: 12'd10, h_tot: 12'd8};
      for (int t = 0; t < 200; t++) begin
        int ex, ey;
        @(negedge clk);
        in_valid = 1;
        in_pos = '{x: coord_t'($urandom % 10), y: coord_t'($urandom % 8)};
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++)
            for (int ch = 0; ch < 2; ch++) win[r][c][ch] = 8'($urandom);
        ex = int'(in_pos.x) - 2; ey = int'(in_pos.y) - 2;
        if (ex < 0) begin ex += 10; ey -= 1; end
        if (ey < 0) ey += 8;
        @(posedge clk); #1;
        checks++;
        if (!out_valid || int'(out_pos.x) != ex || int'(out_pos.y) != ey ||
            out_active != (ex < 6 && ey < 4)) failures++;
        for (int l = 0; l < LANES; l++)
          for (int ch = 0; ch < 2; ch++) begin
            int v, e, got;
            if (l < s*s) begin
              v = 0;
              for (int r = 0; r < 4; r++)
                for (int c = 0; c < 4; c++)
                  v += coef(s, l / s, r) * coef(s, l % s, c) * int'($signed(win[r][c][ch]));
              e = ((v + 8192) >>> 14) + 128;
              e = (e < 0) ? 0 : (e > 255) ? 255 : e;
            end else e = 128;
            got = (ch == 0) ? int'(cb[l]) : int'(cr[l]);
            checks++;
            if (got != e) begin
              failures++;
              if (failures < 5) $display("S=%0d lane %0d ch %0d: %0d exp %0d", s, l, ch, got, e);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
