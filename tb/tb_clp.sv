// tb_clp: a 3 x 3 CLP with 3 input and 2 output maps. Random windows at
// random raster positions enter every clock; each output pixel is compared
// with a direct convolution + bias + PReLU + quantisation computed here,
// after the CLP's 9-clock latency, together with the window-centre position
// and the zero forced at inactive positions.
module tb_clp;
  import sr_pkg::*;
  localparam int K = 3, M = 2, N = 3, LAT = 9;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cfg_t cfg;
  pos_t in_pos, out_pos;
  logic [DW-1:0] win [K][K][N];
  wgt_t w [M][N][K][K];
  act_t bias [M];
  wgt_t slope [M];
  act_t out [M];
  clp #(.K(K), .M(M), .N(N)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, negs = 0, inact = 0;

  typedef struct { bit v; int x; int y; int o [M]; } exp_t;
  exp_t q [$];

  function automatic int neuron(longint s, int b, int p);
    s = s + longint'(b) * 1024;
    if (s < 0) s = (s * p) >>> 10;
    s = s >>> 10;
    return (s > 4095) ? 4095 : (s < -4096) ? -4096 : int'(s);
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '{scale: 3'd2, w_act: 12'd5, h_act: 12'd4, w_tot: 12'd8, h_tot: 12'd6};
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < N; n++)
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) w[m][n][ky][kx] = wgt_t'(int'($urandom % 1201) - 600);
      bias[m]  = act_t'(int'($urandom % 201) - 100);
      slope[m] = wgt_t'(int'($urandom % 1024));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      exp_t e;
      int cx, cy;
      @(negedge clk);
      in_valid = ($urandom % 5 != 0);
      in_pos = '{x: coord_t'($urandom % 8), y: coord_t'($urandom % 6)};
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          for (int n = 0; n < N; n++) win[r][c][n] = DW'(int'($urandom % 1601) - 800);
      cx = int'(in_pos.x) - 1; cy = int'(in_pos.y) - 1;
      if (cx < 0) begin cx += 8; cy -= 1; end
      if (cy < 0) cy += 6;
      e.v = in_valid; e.x = cx; e.y = cy;
      for (int m = 0; m < M; m++) begin
        longint s;
        s = 0;
        for (int n = 0; n < N; n++)
          for (int r = 0; r < K; r++)
            for (int c = 0; c < K; c++)
              s += longint'($signed(win[r][c][n])) * longint'(w[m][n][r][c]);
        if (s + longint'(bias[m]) * 1024 < 0) negs++;
        e.o[m] = (cx < 5 && cy < 4) ? neuron(s, bias[m], slope[m]) : 0;
      end
      if (!(cx < 5 && cy < 4)) inact++;
      q.push_back(e);
      if (t >= LAT - 1) begin
        exp_t x;
        x = q.pop_front();
        @(posedge clk); #1;
        checks++;
        if (out_valid != x.v || int'(out_pos.x) != x.x || int'(out_pos.y) != x.y) begin
          failures++;
          if (failures < 5) $display("t=%0d valid/pos %0d (%0d,%0d) exp %0d (%0d,%0d)", t, out_valid,
                                     out_pos.x, out_pos.y, x.v, x.x, x.y);
        end
        for (int m = 0; m < M; m++) begin
          checks++;
          if (int'(out[m]) != x.o[m]) begin
            failures++;
            if (failures < 5) $display("t=%0d out[%0d]=%0d exp %0d", t, m, out[m], x.o[m]);
          end
        end
      end
    end
    checks++;
    if (negs == 0 || inact == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
