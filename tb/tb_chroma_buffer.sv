// tb_chroma_buffer: writes random chroma blocks line by line and reads each
// block back two lines later, as the later luma would; checks the data read
// one clock after the request, across a wrap of the line index.
module tb_chroma_buffer;
  import sr_pkg::*;
  localparam int WMAX = 8, NR = 4, W = 6, LINES = 10, LAG = 2;
  logic clk = 0, wr_en = 0, rd_en = 0;
  pos_t wr_pos, rd_pos;
  logic [7:0] wr_cb [LANES];
  logic [7:0] wr_cr [LANES];
  logic [7:0] rd_cb [LANES];
  logic [7:0] rd_cr [LANES];
  chroma_buffer #(.WMAX(WMAX), .NR(NR)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int ref_cb [LINES][W][LANES];
  int ref_cr [LINES][W][LANES];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int y = 0; y < LINES + LAG; y++)
      for (int x = 0; x < W; x++) begin
        int ry;
        @(negedge clk);
        wr_en = y < LINES;
        if (y < LINES) begin
          wr_pos = '{x: coord_t'(x), y: coord_t'(y)};
          for (int l = 0; l < LANES; l++) begin
            ref_cb[y][x][l] = $urandom % 256; wr_cb[l] = 8'(ref_cb[y][x][l]);
            ref_cr[y][x][l] = $urandom % 256; wr_cr[l] = 8'(ref_cr[y][x][l]);
          end
        end
        ry = y - LAG;
        rd_en = ry >= 0;
        rd_pos = '{x: coord_t'(x), y: coord_t'(ry)};
        @(posedge clk); #1;
        if (ry >= 0)
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (int'(rd_cb[l]) != ref_cb[ry][x][l] || int'(rd_cr[l]) != ref_cr[ry][x][l]) begin
              failures++;
              if (failures < 5) $display("block (%0d,%0d) lane %0d wrong", ry, x, l);
            end
          end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
