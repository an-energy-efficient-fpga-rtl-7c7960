// tb_line_buffer: streams two small frames (with random gaps) through a
// 3 x 3, two-channel line buffer and checks every window against the
// pixel stream: win[r][c] must be the pixel K-1-r lines and K-1-c
// positions before the newest one, and zero for lines never written.
module tb_line_buffer;
  import sr_pkg::*;
  localparam int K = 3, C = 2, DWD = 8, WMAX = 16;
  localparam int W = 6, H = 4, WT = 10, HT = 7;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  pos_t in_pos, out_pos;
  logic [DWD-1:0] din [C];
  logic [DWD-1:0] win [K][K][C];
  line_buffer #(.K(K), .C(C), .DWD(DWD), .WMAX(WMAX)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int val [2*WT*HT][C];
  int nout = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output number t is the window whose newest pixel is stream value t
  always @(posedge clk) begin
    #1;
    if (out_valid && rst_n) begin
      checks++;
      if (out_pos.x != coord_t'(nout % WT) || out_pos.y != coord_t'((nout / WT) % HT)) failures++;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          for (int ch = 0; ch < C; ch++) begin
            int idx, e;
            idx = nout - (K-1-r)*WT - (K-1-c);
            e = (idx < 0) ? 0 : val[idx][ch];
            checks++;
            if (int'(win[r][c][ch]) != e) begin
              failures++;
              if (failures < 6) $display("out %0d win[%0d][%0d][%0d]=%0d exp %0d", nout, r, c, ch, win[r][c][ch], e);
            end
          end
      nout++;
    end
  end

  initial begin
    int t;
    t = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < HT; y++)
        for (int x = 0; x < WT; x++) begin
          @(negedge clk);
          while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1;
          in_pos = '{x: coord_t'(x), y: coord_t'(y)};
          for (int ch = 0; ch < C; ch++) begin
            val[t][ch] = (x < W && y < H) ? 1 + int'($urandom % 255) : 0;
            din[ch] = DWD'(val[t][ch]);
          end
          t++;
        end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (nout != 2*WT*HT) begin failures++; $display("%0d windows", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
