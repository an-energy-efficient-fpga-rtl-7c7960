// line_buffer: cyclic line buffer and window registers in front of a CLP.
//
// The stream arrives one raster position at a time. K-1 whole lines are kept
// in K-1 simple dual-port memory banks (one read and one write per clock),
// used cyclically: at the start of each line the bank holding the oldest
// line becomes the one that is overwritten. For every arriving pixel the
// banks are read at its column, giving with the pixel itself a K-tall column,
// which is shifted into a K x K window of registers. The window is what the
// CLP's multiply engine consumes.
//
// win[r][c][ch] holds the pixel at (y-(K-1)+r, x-(K-1)+c) when out_pos is
// (x, y), the newest pixel. Positions above or left of the active area are
// blanking, which upstream stages fill with zeros, so the window is zero
// padded at the frame edges as long as blanking is at least K-1 columns and
// K-1 lines.
//
// Following the paper: cyclic line buffer of K-1 lines in simple dual-port
// memory, the CLP starting once K-1 lines are stored. This design's choice:
// registered (block-RAM style) read, so out_* follow in_* by two clocks;
// bank depth WMAX raster positions per line; a bank reads as zero until a
// whole line has been written to it after reset.
module line_buffer
  import sr_pkg::*;
#(
  parameter int unsigned K    = 3,     // window size, >= 2
  parameter int unsigned C    = 1,     // channels stored per pixel
  parameter int unsigned DWD  = 13,    // bits per channel
  parameter int unsigned WMAX = 1456   // raster positions per line, max
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  pos_t             in_pos,
  input  logic [DWD-1:0]   din [C],
  output logic             out_valid,
  output pos_t             out_pos,
  output logic [DWD-1:0]   win [K][K][C]
);
  localparam int unsigned NB  = K - 1;
  localparam int unsigned BW  = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned AW  = $clog2(WMAX);

  logic [C*DWD-1:0] din_flat;
  logic [C*DWD-1:0] rd [NB];
  logic [C*DWD-1:0] din_q;
  logic [BW-1:0]    ptr, ptr_now, ptr_q;
  logic             valid_q;
  pos_t             pos_q;
  logic [NB-1:0]    filled, filled_q;   // bank holds a complete line
  logic [NB-1:0]    filled_now;
  logic             started;            // a pixel has been written since reset

  always_comb
    for (int ch = 0; ch < C; ch++) din_flat[ch*DWD +: DWD] = din[ch];

  // bank overwritten by the current line
  always_comb begin
    ptr_now = ptr;
    if (in_pos.x == '0 && started) ptr_now = (ptr == BW'(NB-1)) ? '0 : BW'(ptr + 1'b1);
  end

  always_comb begin
    filled_now = filled;
    if (in_pos.x == '0 && started) filled_now[ptr] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr     <= '0;
      filled  <= '0;
      started <= 1'b0;
    end else if (in_valid) begin
      started <= 1'b1;
      ptr <= ptr_now;
      filled <= filled_now;
    end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [C*DWD-1:0] mem [WMAX];
    always_ff @(posedge clk) begin
      if (in_valid) begin
        rd[b] <= mem[AW'(in_pos.x)];
        if (ptr_now == BW'(b)) mem[AW'(in_pos.x)] <= din_flat;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      pos_q   <= '0;
      din_q   <= '0;
      ptr_q   <= '0;
      filled_q <= '0;
    end else begin
      valid_q <= in_valid;
      if (in_valid) begin
        pos_q <= in_pos;
        din_q <= din_flat;
        ptr_q <= ptr_now;
        filled_q <= filled_now;
      end
    end
  end

  // column: row r = 0 is the oldest line (bank ptr_q), row K-1 the new pixel
  logic [C*DWD-1:0] col [K];
  always_comb begin
    // lines not yet written since reset read as zero (blanking)
    for (int r = 0; r < NB; r++)
      col[r] = filled_q[(int'(ptr_q) + r) % NB] ? rd[(int'(ptr_q) + r) % NB] : '0;
    col[K-1] = din_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pos   <= '0;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          for (int ch = 0; ch < C; ch++) win[r][c][ch] <= '0;
    end else begin
      out_valid <= valid_q;
      if (valid_q) begin
        out_pos <= pos_q;
        for (int r = 0; r < K; r++) begin
          for (int c = 0; c < K-1; c++) win[r][c] <= win[r][c+1];
          for (int ch = 0; ch < C; ch++) win[r][K-1][ch] <= col[r][ch*DWD +: DWD];
        end
      end
    end
  end
endmodule
