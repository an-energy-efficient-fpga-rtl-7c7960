// chroma_buffer: line buffer holding upscaled chroma blocks until the luma of
// the same LR pixel leaves the CNN.
//
// The chroma path (one 4-line window) is several lines shorter than the luma
// path (three line buffers and three processors), so its HR blocks are
// stored, addressed by their LR position, and read back when the luma block
// with the same position arrives. NR lines of blocks are kept (line index
// y mod NR), which covers a luma lag of up to NR-1 lines. The paper draws a
// line buffer at this place; its size and addressing are this design's.
//
// Timing: one write and one read per clock (simple dual port); read data
// appear one clock after rd_en.
module chroma_buffer
  import sr_pkg::*;
#(
  parameter int unsigned WMAX = 1456,  // raster positions per line, max
  parameter int unsigned NR   = 8      // lines of blocks kept (power of two)
) (
  input  logic       clk,
  input  logic       wr_en,
  input  pos_t       wr_pos,
  input  logic [7:0] wr_cb [LANES],
  input  logic [7:0] wr_cr [LANES],
  input  logic       rd_en,
  input  pos_t       rd_pos,
  output logic [7:0] rd_cb [LANES],
  output logic [7:0] rd_cr [LANES]
);
  localparam int unsigned RB = $clog2(NR);
  localparam int unsigned AW = $clog2(NR*WMAX);
  localparam int unsigned BW = LANES*16;

  logic [BW-1:0] mem [NR*WMAX];
  logic [BW-1:0] wdat, rdat;

  function automatic logic [AW-1:0] addr(pos_t p);
    return AW'(p.y[RB-1:0]) * AW'(WMAX) + AW'(p.x);
  endfunction

  always_comb
    for (int l = 0; l < LANES; l++) wdat[l*16 +: 16] = {wr_cr[l], wr_cb[l]};

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_pos)] <= wdat;
    if (rd_en) rdat <= mem[addr(rd_pos)];
  end

  always_comb
    for (int l = 0; l < LANES; l++) begin
      rd_cb[l] = rdat[l*16 +: 8];
      rd_cr[l] = rdat[l*16 + 8 +: 8];
    end
endmodule
