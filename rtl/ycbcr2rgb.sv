// ycbcr2rgb: colour-space converter at the output of the super-resolution
// system. It recombines the CNN's HR luma with the bicubic-upscaled chroma.
//
// Inverse of the full-range BT.601 conversion used at the input, with 8-bit
// fixed-point coefficients (this design's choice; the paper gives none):
//   R = Y + ((359 (Cr-128) + 128) >> 8)
//   G = Y - ((88 (Cb-128) + 183 (Cr-128) + 128) >> 8)
//   B = Y + ((454 (Cb-128) + 128) >> 8)
// clamped to 0..255. Purely combinational; the caller registers the result.
module ycbcr2rgb (
  input  logic [7:0] y,
  input  logic [7:0] cb,
  input  logic [7:0] cr,
  output logic [7:0] r,
  output logic [7:0] g,
  output logic [7:0] b
);
  function automatic logic [7:0] clamp8(int v);
    if (v < 0)   return 8'd0;
    if (v > 255) return 8'd255;
    return 8'(v);
  endfunction

  int yi, cbi, cri;
  always_comb begin
    yi  = int'(y);
    cbi = int'(cb) - 128;
    cri = int'(cr) - 128;
    r = clamp8(yi + ((359*cri + 128) >>> 8));
    g = clamp8(yi - ((88*cbi + 183*cri + 128) >>> 8));
    b = clamp8(yi + ((454*cbi + 128) >>> 8));
  end
endmodule
