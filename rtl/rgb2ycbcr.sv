// rgb2ycbcr: colour-space converter at the input of the super-resolution
// system. Each LR RGB pixel is split into luma Y, which goes through the CNN,
// and chroma Cb/Cr, which are upscaled by bicubic interpolation.
//
// Full-range BT.601 with 8-bit integer coefficients (the paper names the
// conversion but not its coefficients; these are this design's choice):
//   Y  = (77 R + 150 G + 29 B + 128) >> 8
//   Cb = ((-43 R - 85 G + 128 B + 128) >> 8) + 128
//   Cr = ((128 R - 107 G - 21 B + 128) >> 8) + 128
// all clamped to 0..255. One register stage: outputs follow inputs by one
// clock; in_valid is delayed alongside as out_valid.
module rgb2ycbcr (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] r,
  input  logic [7:0] g,
  input  logic [7:0] b,
  output logic       out_valid,
  output logic [7:0] y,
  output logic [7:0] cb,
  output logic [7:0] cr
);
  function automatic logic [7:0] clamp8(int v);
    if (v < 0)   return 8'd0;
    if (v > 255) return 8'd255;
    return 8'(v);
  endfunction

  int ri, gi, bi;
  logic [7:0] y_c, cb_c, cr_c;

  always_comb begin
    ri = int'(r); gi = int'(g); bi = int'(b);
    y_c  = clamp8((77*ri + 150*gi + 29*bi + 128) >>> 8);
    cb_c = clamp8(((-43*ri - 85*gi + 128*bi + 128) >>> 8) + 128);
    cr_c = clamp8(((128*ri - 107*gi - 21*bi + 128) >>> 8) + 128);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y  <= '0;
      cb <= '0;
      cr <= '0;
    end else begin
      out_valid <= in_valid;
      y  <= y_c;
      cb <= cb_c;
      cr <= cr_c;
    end
  end
endmodule
