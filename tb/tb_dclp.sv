// tb_dclp: the TDC deconvolution processor with 2 input maps, at scale 2, 3
// and 4. Random 4 x 4 windows enter at random raster positions; every output
// lane is compared with the deconvolution written in its scatter form
// (HR pixel (Y,X) = bias + sum of in(i,j) * wd[Y+4-S*i][X+4-S*j]), computed
// here from the window alone, after the 5-clock latency. The block position,
// the zero lanes above S*S and the zero at inactive positions are checked
// too.
module tb_dclp;
  import sr_pkg::*;
  localparam int N = 2, LAT = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cfg_t cfg;
  pos_t in_pos, out_pos;
  logic [DW-1:0] win [KCMAX][KCMAX][N];
  wgt_t wd [N][KD][KD];
  act_t bias;
  act_t out [LANES];
  dclp #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int per_scale [5];

  typedef struct { bit v; int x; int y; int o [LANES]; } exp_t;
  exp_t q [$];

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
      int back;
      back = (s == 2) ? 2 : 3;
      cfg = '{scale: 3'(s), w_act: 12'd7, h_act: 12'd5, w_tot: 12'd11, h_tot: 12'd9};
      for (int n = 0; n < N; n++)
        for (int a = 0; a < KD; a++)
          for (int b = 0; b < KD; b++) wd[n][a][b] = wgt_t'(int'($urandom % 1201) - 600);
      bias = act_t'(int'($urandom % 401) - 200);
      for (int t = 0; t < 300 + LAT - 1; t++) begin
        @(negedge clk);
        if (t < 300) begin
          exp_t e;
          int bx, by;
          in_valid = 1;
          in_pos = '{x: coord_t'($urandom % 11), y: coord_t'($urandom % 9)};
          for (int r = 0; r < KCMAX; r++)
            for (int c = 0; c < KCMAX; c++)
              for (int n = 0; n < N; n++) win[r][c][n] = DW'(int'($urandom % 2001) - 1000);
          bx = int'(in_pos.x) - back; by = int'(in_pos.y) - back;
          if (bx < 0) begin bx += 11; by -= 1; end
          if (by < 0) by += 9;
          e.v = 1; e.x = bx; e.y = by;
          for (int l = 0; l < LANES; l++) begin
            longint acc;
            int yo, xo;
            e.o[l] = 0;
            if (l < s*s && bx < 7 && by < 5) begin
              yo = l / s; xo = l % s;
              acc = 0;
              for (int r = 0; r < KCMAX; r++)
                for (int c = 0; c < KCMAX; c++) begin
                  int ky, kx;
                  ky = s*(3 - back - r) + yo + 4;
                  kx = s*(3 - back - c) + xo + 4;
                  if (ky >= 0 && ky < KD && kx >= 0 && kx < KD)
                    for (int n = 0; n < N; n++)
                      acc += longint'($signed(win[r][c][n])) * longint'(wd[n][ky][kx]);
                end
              acc = (acc + longint'(bias) * 1024) >>> 10;
              e.o[l] = (acc > 4095) ? 4095 : (acc < -4096) ? -4096 : int'(acc);
            end
          end
          q.push_back(e);
        end else in_valid = 0;
        if (t >= LAT - 1) begin
          exp_t x;
          x = q.pop_front();
          @(posedge clk); #1;
          checks++;
          if (!out_valid || int'(out_pos.x) != x.x || int'(out_pos.y) != x.y) begin
            failures++;
            if (failures < 5) $display("S=%0d pos (%0d,%0d) exp (%0d,%0d)", s, out_pos.x, out_pos.y, x.x, x.y);
          end
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (int'(out[l]) != x.o[l]) begin
              failures++;
              if (failures < 8) $display("S=%0d lane %0d = %0d exp %0d", s, l, out[l], x.o[l]);
            end
          end
          per_scale[s]++;
        end
      end
    end
    for (int s = 2; s <= 4; s++) begin checks++; if (per_scale[s] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
