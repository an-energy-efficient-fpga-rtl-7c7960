// tb_combined_clp: a 3 x 3 CLP (2 -> 3 maps) feeding a 1 x 1 CLP (3 -> 2
// maps) directly. Random windows enter every clock; each output is compared
// with the two layers computed here one after the other (with PReLU and
// quantisation after each), after the combined latency of 8 + 6 clocks.
module tb_combined_clp;
  import sr_pkg::*;
  localparam int K = 3, N = 2, M1 = 3, M2 = 2, LAT = 8 + 6;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  cfg_t cfg;
  pos_t in_pos, out_pos;
  logic [DW-1:0] win [K][K][N];
  wgt_t w1 [M1][N][K][K];
  act_t bias1 [M1];
  wgt_t slope1 [M1];
  wgt_t w2 [M2][M1][1][1];
  act_t bias2 [M2];
  wgt_t slope2 [M2];
  act_t out [M2];
  combined_clp #(.K(K), .N(N), .M1(M1), .M2(M2)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  typedef struct { bit v; int x; int y; int o [M2]; } exp_t;
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
    cfg = '{scale: 3'd2, w_act: 12'd6, h_act: 12'd5, w_tot: 12'd9, h_tot: 12'd7};
    for (int m = 0; m < M1; m++) begin
      for (int n = 0; n < N; n++)
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) w1[m][n][ky][kx] = wgt_t'(int'($urandom % 1201) - 600);
      bias1[m] = act_t'(int'($urandom % 201) - 100);
      slope1[m] = wgt_t'(int'($urandom % 1024));
    end
    for (int m = 0; m < M2; m++) begin
      for (int n = 0; n < M1; n++) w2[m][n][0][0] = wgt_t'(int'($urandom % 2001) - 1000);
      bias2[m] = act_t'(int'($urandom % 201) - 100);
      slope2[m] = wgt_t'(int'($urandom % 1024));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      exp_t e;
      int cx, cy, mid [M1];
      bit act;
      @(negedge clk);
      in_valid = 1;
      in_pos = '{x: coord_t'($urandom % 9), y: coord_t'($urandom % 7)};
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          for (int n = 0; n < N; n++) win[r][c][n] = DW'(int'($urandom % 1601) - 800);
      cx = int'(in_pos.x) - 1; cy = int'(in_pos.y) - 1;
      if (cx < 0) begin cx += 9; cy -= 1; end
      if (cy < 0) cy += 7;
      act = cx < 6 && cy < 5;
      e.v = 1; e.x = cx; e.y = cy;
      for (int m = 0; m < M1; m++) begin
        longint s;
        s = 0;
        for (int n = 0; n < N; n++)
          for (int r = 0; r < K; r++)
            for (int c = 0; c < K; c++)
              s += longint'($signed(win[r][c][n])) * longint'(w1[m][n][r][c]);
        mid[m] = act ? neuron(s, bias1[m], slope1[m]) : 0;
      end
      for (int m = 0; m < M2; m++) begin
        longint s;
        s = 0;
        for (int n = 0; n < M1; n++) s += longint'(mid[n]) * longint'(w2[m][n][0][0]);
        e.o[m] = act ? neuron(s, bias2[m], slope2[m]) : 0;
      end
      q.push_back(e);
      if (t >= LAT - 1) begin
        exp_t x;
        x = q.pop_front();
        @(posedge clk); #1;
        checks++;
        if (out_valid != x.v || int'(out_pos.x) != x.x || int'(out_pos.y) != x.y) failures++;
        for (int m = 0; m < M2; m++) begin
          checks++;
          if (int'(out[m]) != x.o[m]) begin
            failures++;
            if (failures < 5) $display("t=%0d out[%0d]=%0d exp %0d", t, m, out[m], x.o[m]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
