// weight_buffer: on-chip store of every weight, bias and PReLU slope of the
// network, shared by the CLPs.
//
// All parameters of Light FSRCNN fit on chip, which is what lets the system
// run without off-chip memory. The store is loaded word by word through a
// write port (address map in sr_pkg, WA_*), standing in for the way the
// paper changes stored weights at run time without re-synthesis. The
// convolution layers have one weight set; the deconvolution layer has one set
// per scale factor (2, 3, 4), and the set of cfg_scale is presented on wd and
// dbias. Outputs are the stored words, reshaped into the arrays each CLP
// expects; the store is written one word per clock and read combinationally.
// Contents are not reset: they must be loaded before the first frame.
module weight_buffer
  import sr_pkg::*;
(
  input  logic           clk,
  input  logic           we,
  input  logic [WAW-1:0] waddr,
  input  wgt_t           wdata,
  input  logic [2:0]     cfg_scale,
  output wgt_t           w1 [L1_M][L1_N][L1_K][L1_K],
  output act_t           b1 [L1_M],
  output wgt_t           p1 [L1_M],
  output wgt_t           w2 [L2_M][L2_N][1][1],
  output act_t           b2 [L2_M],
  output wgt_t           p2 [L2_M],
  output wgt_t           w3 [L3_M][L3_N][L3_K][L3_K],
  output act_t           b3 [L3_M],
  output wgt_t           p3 [L3_M],
  output wgt_t           w4 [L4_M][L4_N][1][1],
  output act_t           b4 [L4_M],
  output wgt_t           p4 [L4_M],
  output wgt_t           wd [DC_N][KD][KD],
  output act_t           dbias
);
  // One register per word, each with its own address decode, so that every
  // word can drive its multiplier directly.
  logic [WA_END-1:0][DW-1:0] mem;

  always_ff @(posedge clk)
    for (int a = 0; a < WA_END; a++)
      if (we && waddr == WAW'(a)) mem[a] <= wdata;

  always_comb begin
    for (int m = 0; m < L1_M; m++) begin
      for (int n = 0; n < L1_N; n++)
        for (int ky = 0; ky < L1_K; ky++)
          for (int kx = 0; kx < L1_K; kx++)
            w1[m][n][ky][kx] = mem[WA_L1 + ((m*L1_N + n)*L1_K + ky)*L1_K + kx];
      b1[m] = mem[WA_B1 + m];
      p1[m] = mem[WA_P1 + m];
    end
    for (int m = 0; m < L2_M; m++) begin
      for (int n = 0; n < L2_N; n++) w2[m][n][0][0] = mem[WA_L2 + m*L2_N + n];
      b2[m] = mem[WA_B2 + m];
      p2[m] = mem[WA_P2 + m];
    end
    for (int m = 0; m < L3_M; m++) begin
      for (int n = 0; n < L3_N; n++)
        for (int ky = 0; ky < L3_K; ky++)
          for (int kx = 0; kx < L3_K; kx++)
            w3[m][n][ky][kx] = mem[WA_L3 + ((m*L3_N + n)*L3_K + ky)*L3_K + kx];
      b3[m] = mem[WA_B3 + m];
      p3[m] = mem[WA_P3 + m];
    end
    for (int m = 0; m < L4_M; m++) begin
      for (int n = 0; n < L4_N; n++) w4[m][n][0][0] = mem[WA_L4 + m*L4_N + n];
      b4[m] = mem[WA_B4 + m];
      p4[m] = mem[WA_P4 + m];
    end
    // Deconvolution set of the current scale (2, 3 or 4; others read set 2).
    for (int n = 0; n < DC_N; n++)
      for (int yd = 0; yd < KD; yd++)
        for (int xd = 0; xd < KD; xd++) begin
          unique case (cfg_scale)
            3'd3:    wd[n][yd][xd] = mem[WA_DW + 1*DW_SET + (n*KD + yd)*KD + xd];
            3'd4:    wd[n][yd][xd] = mem[WA_DW + 2*DW_SET + (n*KD + yd)*KD + xd];
            default: wd[n][yd][xd] = mem[WA_DW + (n*KD + yd)*KD + xd];
          endcase
        end
    unique case (cfg_scale)
      3'd3:    dbias = mem[WA_DB + 1];
      3'd4:    dbias = mem[WA_DB + 2];
      default: dbias = mem[WA_DB];
    endcase
  end
endmodule
