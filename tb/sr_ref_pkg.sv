// sr_ref_pkg: bit-exact reference model of the super-resolution system, for
// the testbenches. It is written as a plain frame-based computation (direct
// convolutions, a scatter-form deconvolution, textbook bicubic weights from
// real arithmetic) so that it shares no structure with the streaming RTL.
// Numbers follow the RTL's formats: activations with 8 fraction bits,
// weights and slopes with 10, one floor shift and saturation to 13 bits per
// neuron.
package sr_ref_pkg;

  // deterministic pseudo-random numbers
  function automatic int unsigned hash(int unsigned a);
    a = a ^ (a >> 16);
    a = a * 32'h7feb352d;
    a = a ^ (a >> 15);
    a = a * 32'h846ca68b;
    a = a ^ (a >> 16);
    return a;
  endfunction

  function automatic int rnd(int unsigned seed, int lo, int hi);
    int unsigned span;
    span = hi - lo + 1;
    return lo + int'(hash(seed) % span);
  endfunction

  function automatic int sat13(longint v);
    if (v > 4095)  return 4095;
    if (v < -4096) return -4096;
    return int'(v);
  endfunction

  function automatic int clamp8(int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  // neuron output: bias, optional PReLU, quantisation
  function automatic int neuron(longint sum, int b, int p, bit act);
    longint s;
    s = sum + (longint'(b) <<< 10);
    if (act && s < 0) s = (s * p) >>> 10;
    return sat13(s >>> 10);
  endfunction

  class sr_model;
    int S, W, H;
    int unsigned seed;
    // weights, flat, in the weight buffer's order
    int w1[25*25]; int b1[25]; int p1[25];
    int w2[5*25];  int b2[5];  int p2[5];
    int w3[5*5*9]; int b3[5];  int p3[5];
    int w4[25*5];  int b4[25]; int p4[25];
    int wd[3][25*49]; int db[3];
    int neg_prelu;           // neurons that took the negative PReLU branch

    function new(int unsigned sd);
      seed = sd;
      neg_prelu = 0;
      foreach (w1[i]) w1[i] = rnd(sd + 1000 + i, -160, 160);
      foreach (w2[i]) w2[i] = rnd(sd + 2000 + i, -150, 150);
      foreach (w3[i]) w3[i] = rnd(sd + 3000 + i, -180, 180);
      foreach (w4[i]) w4[i] = rnd(sd + 4000 + i, -300, 300);
      for (int s = 0; s < 3; s++) begin
        foreach (wd[s][i]) wd[s][i] = rnd(sd + 10000*(s+1) + i, -120, 160);
        db[s] = rnd(sd + 500 + s, -40, 40);
      end
      foreach (b1[i]) begin b1[i] = rnd(sd + 600 + i, -40, 40); p1[i] = rnd(sd + 700 + i, 0, 400); end
      foreach (b2[i]) begin b2[i] = rnd(sd + 800 + i, -40, 40); p2[i] = rnd(sd + 810 + i, 0, 400); end
      foreach (b3[i]) begin b3[i] = rnd(sd + 820 + i, -40, 40); p3[i] = rnd(sd + 830 + i, 0, 400); end
      foreach (b4[i]) begin b4[i] = rnd(sd + 840 + i, -40, 40); p4[i] = rnd(sd + 870 + i, 0, 400); end
    endfunction

    // word at a weight-buffer address (same map as the RTL package)
    function int word(int a);
      int o;
      o = 0;
      if (a < o + 625) return w1[a-o]; o += 625;
      if (a < o + 125) return w2[a-o]; o += 125;
      if (a < o + 225) return w3[a-o]; o += 225;
      if (a < o + 125) return w4[a-o]; o += 125;
      if (a < o + 25)  return b1[a-o]; o += 25;
      if (a < o + 5)   return b2[a-o]; o += 5;
      if (a < o + 5)   return b3[a-o]; o += 5;
      if (a < o + 25)  return b4[a-o]; o += 25;
      if (a < o + 25)  return p1[a-o]; o += 25;
      if (a < o + 5)   return p2[a-o]; o += 5;
      if (a < o + 5)   return p3[a-o]; o += 5;
      if (a < o + 25)  return p4[a-o]; o += 25;
      if (a < o + 3)   return db[a-o]; o += 3;
      return wd[(a-o)/1225][(a-o)%1225];
    endfunction

    // input image
    function int rgb(int x, int y, int ch);
      int base;
      base = (x*5 + y*3 + ch*60) % 256;
      return clamp8(base + rnd(seed*7 + (y*4099 + x)*3 + ch, -40, 40));
    endfunction

    function void ycc(int x, int y, output int yy, output int cb, output int cr);
      int r, g, b;
      r = rgb(x, y, 0); g = rgb(x, y, 1); b = rgb(x, y, 2);
      yy = clamp8((77*r + 150*g + 29*b + 128) >>> 8);
      cb = clamp8(((-43*r - 85*g + 128*b + 128) >>> 8) + 128);
      cr = clamp8(((128*r - 107*g - 21*b + 128) >>> 8) + 128);
    endfunction

    // ---------------- luma network on a band of LR rows [r0, r1]
    // maps are flat: ((row - base) * W + x) * C + c
    int m0[], m1[], m2[], m3[], m4[];
    int b0, bb1, bb2;     // first row held by m0 / m1,m2 / m3,m4
    int hr[];             // HR luma codes, rows S*r0 .. S*(r1+1)-1
    int hr_r0;

    function int at(ref int m[], input int base, int nrows, int C, int y, int x, int c);
      if (y < 0 || y >= H || x < 0 || x >= W) return 0;
      if (y < base || y >= base + nrows) begin
        $display("model: row %0d outside band", y);
        return 0;
      end
      return m[((y - base)*W + x)*C + c];
    endfunction

    function void run_band(int r0, int r1);
      int n0, n1, n3;
      b0  = r0 - 5; n0 = r1 - r0 + 11;
      bb1 = r0 - 3; n1 = r1 - r0 + 7;
      bb2 = r0 - 2; n3 = r1 - r0 + 5;
      m0 = new[n0*W];
      m1 = new[n1*W*25];
      m2 = new[n1*W*5];
      m3 = new[n3*W*5];
      m4 = new[n3*W*25];
      for (int y = b0; y < b0 + n0; y++)
        for (int x = 0; x < W; x++) begin
          int yy, cb, cr;
          if (y >= 0 && y < H) begin
            ycc(x, y, yy, cb, cr);
            m0[(y-b0)*W + x] = yy;
          end else m0[(y-b0)*W + x] = 0;
        end
      // Conv(5,25,1) and Conv(1,5,25)
      for (int y = bb1; y < bb1 + n1; y++)
        for (int x = 0; x < W; x++) begin
          for (int m = 0; m < 25; m++) begin
            longint s;
            s = 0;
            for (int ky = 0; ky < 5; ky++)
              for (int kx = 0; kx < 5; kx++)
                s += longint'(at(m0, b0, n0, 1, y+ky-2, x+kx-2, 0)) * w1[m*25 + ky*5 + kx];
            if (s + (longint'(b1[m]) <<< 10) < 0) neg_prelu++;
            m1[((y-bb1)*W + x)*25 + m] = neuron(s, b1[m], p1[m], 1);
          end
          for (int m = 0; m < 5; m++) begin
            longint s;
            s = 0;
            for (int n = 0; n < 25; n++) s += longint'(m1[((y-bb1)*W + x)*25 + n]) * w2[m*25 + n];
            m2[((y-bb1)*W + x)*5 + m] = neuron(s, b2[m], p2[m], 1);
          end
        end
      // Conv(3,5,5) and Conv(1,25,5)
      for (int y = bb2; y < bb2 + n3; y++)
        for (int x = 0; x < W; x++) begin
          for (int m = 0; m < 5; m++) begin
            longint s;
            s = 0;
            for (int n = 0; n < 5; n++)
              for (int ky = 0; ky < 3; ky++)
                for (int kx = 0; kx < 3; kx++)
                  s += longint'(at(m2, bb1, n1, 5, y+ky-1, x+kx-1, n)) * w3[((m*5 + n)*3 + ky)*3 + kx];
            m3[((y-bb2)*W + x)*5 + m] = neuron(s, b3[m], p3[m], 1);
          end
          for (int m = 0; m < 25; m++) begin
            longint s;
            s = 0;
            for (int n = 0; n < 5; n++) s += longint'(m3[((y-bb2)*W + x)*5 + n]) * w4[m*5 + n];
            m4[((y-bb2)*W + x)*25 + m] = (y >= 0 && y < H) ? neuron(s, b4[m], p4[m], 1) : 0;
          end
        end
      // deconvolution, scatter form: HR(Y,X) gathers in(i,j) * wd[Y+4-S*i][X+4-S*j]
      hr_r0 = r0;
      hr = new[(r1 - r0 + 1)*S*S*W];
      for (int yy = S*r0; yy < S*(r1+1); yy++)
        for (int xx = 0; xx < S*W; xx++) begin
          longint s;
          s = 0;
          for (int i = bb2; i < bb2 + n3; i++) begin
            int ky;
            ky = yy + 4 - S*i;
            if (ky < 0 || ky > 6) continue;
            for (int j = (xx + 4)/S - 4; j <= (xx + 4)/S; j++) begin
              int kx;
              kx = xx + 4 - S*j;
              if (j < 0 || j >= W || kx < 0 || kx > 6) continue;
              for (int n = 0; n < 25; n++)
                s += longint'(at(m4, bb2, n3, 25, i, j, n)) * wd[S-2][(n*7 + ky)*7 + kx];
            end
          end
          hr[(yy - S*r0)*S*W + xx] = clamp8(neuron(s, db[S-2], 0, 0));
        end
    endfunction

    function int hr_luma(int yy, int xx);
      return hr[(yy - S*hr_r0)*S*W + xx];
    endfunction

    // ---------------- chroma: bicubic, Keys a = -0.5, 7-bit weights
    function int bc_coef(int p, int k);
      real t, w;
      t = real'(p) / real'(S);
      case (k)
        0: w = -0.5*t*t*t + t*t - 0.5*t;
        1: w =  1.5*t*t*t - 2.5*t*t + 1.0;
        2: w = -1.5*t*t*t + 2.0*t*t + 0.5*t;
        default: w = 0.5*t*t*t - 0.5*t*t;
      endcase
      w = w * 128.0;
      return (w >= 0.0) ? int'($floor(w + 0.5)) : -int'($floor(-w + 0.5));
    endfunction

    function int chroma(int yy, int xx, int ch);
      int ly, lx, yo, xo, v, r;
      ly = yy / S; yo = yy % S;
      lx = xx / S; xo = xx % S;
      v = 0;
      for (int a = 0; a < 4; a++)
        for (int b = 0; b < 4; b++) begin
          int sy, sx, c8, y8, cb, cr;
          sy = ly - 1 + a; sx = lx - 1 + b;
          if (sy < 0 || sy >= H || sx < 0 || sx >= W) continue;
          ycc(sx, sy, y8, cb, cr);
          c8 = (ch == 0) ? cb : cr;
          v += bc_coef(yo, a) * bc_coef(xo, b) * (c8 - 128);
        end
      r = ((v + 8192) >>> 14) + 128;
      return clamp8(r);
    endfunction

    function int hr_rgb(int yy, int xx);
      int y8, cb, cr, r, g, b;
      y8 = hr_luma(yy, xx);
      cb = chroma(yy, xx, 0) - 128;
      cr = chroma(yy, xx, 1) - 128;
      r = clamp8(y8 + ((359*cr + 128) >>> 8));
      g = clamp8(y8 - ((88*cb + 183*cr + 128) >>> 8));
      b = clamp8(y8 + ((454*cb + 128) >>> 8));
      return (r << 16) | (g << 8) | b;
    endfunction
  endclass

endpackage
