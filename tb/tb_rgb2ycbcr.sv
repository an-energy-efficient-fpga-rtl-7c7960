// tb_rgb2ycbcr: checks the input colour conversion against the BT.601
// full-range integer formulas, including the extremes, and its one-clock
// latency.
module tb_rgb2ycbcr;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [7:0] r, g, b, y, cb, cr;
  rgb2ycbcr dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic int c8(int v); return v < 0 ? 0 : v > 255 ? 255 : v; endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      int ri, gi, bi, ey, ecb, ecr;
      @(negedge clk);
      case (i)
        0: begin ri = 0; gi = 0; bi = 0; end
        1: begin ri = 255; gi = 255; bi = 255; end
        2: begin ri = 255; gi = 0; bi = 0; end
        3: begin ri = 0; gi = 0; bi = 255; end
        default: begin ri = $urandom % 256; gi = $urandom % 256; bi = $urandom % 256; end
      endcase
      r = 8'(ri); g = 8'(gi); b = 8'(bi); in_valid = 1;
      ey  = c8((77*ri + 150*gi + 29*bi + 128) >>> 8);
      ecb = c8(((-43*ri - 85*gi + 128*bi + 128) >>> 8) + 128);
      ecr = c8(((128*ri - 107*gi - 21*bi + 128) >>> 8) + 128);
      @(posedge clk); #1;
      checks++;
      if (!out_valid || y != 8'(ey) || cb != 8'(ecb) || cr != 8'(ecr)) begin
        failures++;
        if (failures < 5) $display("rgb %0d %0d %0d -> %0d %0d %0d, expected %0d %0d %0d",
                                   ri, gi, bi, y, cb, cr, ey, ecb, ecr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
