// hr_raster_buffer: output line buffer turning S x S HR blocks into HR
// raster order for the panel.
//
// The deconvolution processor produces, for each LR pixel, the S x S HR
// pixels below and right of S*(x, y) at once. A panel wants whole HR lines.
// Blocks of one LR line are written into one of two banks (LR line parity);
// when the last block of the line is in, the bank is read out as S HR lines,
// S*S consecutive HR pixels per clock, while the other bank fills. Reading a
// line takes S*ceil(w_act/S) < w_act + S clocks, less than the w_tot clocks
// of filling one (blanking is at least 8 columns), so two banks suffice.
// The paper draws a line buffer after the deconvolution CLP; the ping-pong
// organisation and the S*S-pixel output width are this design's choice.
//
// Interface: blk_pix[yo*S+xo] is HR pixel (S*blk_pos.y+yo, S*blk_pos.x+xo).
// out_pix[j] is HR pixel (out_y, out_x + j) for j < S*S; other lanes are 0.
// When w_act is not a multiple of S the last clock of an HR line carries
// fewer than S*S pixels; lanes past the line end are 0. out_* are registered.
//
// Timing: the S*S output pixels of one clock come from at most SMAX
// neighbouring blocks, so the store is read through SMAX synchronous
// whole-block ports; a second register stage picks the lanes. Output starts
// three clocks after the last block of a line is written.
module hr_raster_buffer
  import sr_pkg::*;
#(
  parameter int unsigned WMAX = 1456   // LR pixels per line, max
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        blk_valid,
  input  pos_t        blk_pos,
  input  logic [23:0] blk_pix [LANES],
  output logic        out_valid,
  output coord_t      out_x,
  output coord_t      out_y,
  output logic [23:0] out_pix [LANES],
  output logic        overrun          // a line completed while the previous one was still read
);
  localparam int unsigned AW = $clog2(WMAX);
  localparam int unsigned BW = LANES*24;

  logic [BW-1:0] mem [2][WMAX];
  logic [BW-1:0] wdat;

  always_comb
    for (int l = 0; l < LANES; l++) wdat[l*24 +: 24] = blk_pix[l];

  always_ff @(posedge clk)
    if (blk_valid) mem[blk_pos.y[0]][AW'(blk_pos.x)] <= wdat;

  // read-out state
  logic   busy, bank;
  coord_t ly, k, kmax;
  logic [2:0] yo;
  logic [2:0] s;
  assign s = cfg.scale;

  logic line_done;
  assign line_done = blk_valid && (blk_pos.x == cfg.w_act - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      bank    <= 1'b0;
      ly      <= '0;
      k       <= '0;
      kmax    <= '0;
      yo      <= '0;
      overrun <= 1'b0;
    end else begin
      overrun <= line_done && busy;
      if (line_done) begin
        busy <= 1'b1;
        bank <= blk_pos.y[0];
        ly   <= blk_pos.y;
        k    <= '0;
        yo   <= '0;
        kmax <= (cfg.w_act + coord_t'(s) - 1'b1) / coord_t'(s) - 1'b1;
      end else if (busy) begin
        if (k == kmax) begin
          k <= '0;
          if (yo == s - 1'b1) busy <= 1'b0;
          else                yo   <= yo + 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
    end
  end

  // Stage 1: read the SMAX blocks at LR columns k*S .. k*S+SMAX-1.
  logic [BW-1:0] rword [SMAX];
  logic          v1;
  coord_t        x1, y1;
  logic [2:0]    yo1;
  coord_t        rem1;                  // LR columns left in the line from k*S

  always_ff @(posedge clk)
    for (int c = 0; c < SMAX; c++) begin
      int unsigned col;
      col = int'(k) * int'(s) + c;
      if (col >= WMAX) col = WMAX - 1;
      rword[c] <= mem[bank][AW'(col)];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1  <= 1'b0;
      x1  <= '0;
      y1  <= '0;
      yo1 <= '0;
      rem1 <= '0;
    end else begin
      v1  <= busy;
      x1  <= coord_t'(k * s * s);
      y1  <= coord_t'(ly * s + coord_t'(yo));
      yo1 <= yo;
      rem1 <= cfg.w_act - coord_t'(k * s);
    end
  end

  // Stage 2: S*S consecutive pixels of HR line yo1; pixel j is phase j%S of
  // block j/S.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      for (int j = 0; j < LANES; j++) out_pix[j] <= '0;
    end else begin
      out_valid <= v1;
      out_x     <= x1;
      out_y     <= y1;
      for (int j = 0; j < LANES; j++) begin
        int unsigned sj;
        sj = int'(s);
        out_pix[j] <= (j < sj*sj && v1 && j / sj < int'(rem1)) ? rword[j / sj][(int'(yo1)*sj + j % sj)*24 +: 24] : '0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) !(line_done && busy));
endmodule
