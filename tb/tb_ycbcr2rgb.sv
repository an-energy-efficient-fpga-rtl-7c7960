// tb_ycbcr2rgb: checks the output colour conversion against the inverse
// BT.601 full-range formulas, including clamping at 0 and 255.
module tb_ycbcr2rgb;
  logic [7:0] y, cb, cr, r, g, b;
  ycbcr2rgb dut (.*);
  int checks = 0, failures = 0;

  function automatic int c8(int v); return v < 0 ? 0 : v > 255 ? 255 : v; endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int clamps = 0;
    for (int i = 0; i < 2000; i++) begin
      int yi, cbi, cri, er, eg, eb;
      yi = $urandom % 256; cbi = $urandom % 256; cri = $urandom % 256;
      if (i == 0) begin yi = 0; cbi = 0; cri = 0; end
      if (i == 1) begin yi = 255; cbi = 255; cri = 255; end
      y = 8'(yi); cb = 8'(cbi); cr = 8'(cri);
      #1;
      er = yi + ((359*(cri-128) + 128) >>> 8);
      eg = yi - ((88*(cbi-128) + 183*(cri-128) + 128) >>> 8);
      eb = yi + ((454*(cbi-128) + 128) >>> 8);
      if (er != c8(er) || eg != c8(eg) || eb != c8(eb)) clamps++;
      checks++;
      if (r != 8'(c8(er)) || g != 8'(c8(eg)) || b != 8'(c8(eb))) begin
        failures++;
        if (failures < 5) $display("ycc %0d %0d %0d -> %0d %0d %0d", yi, cbi, cri, r, g, b);
      end
    end
    checks++;
    if (clamps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
