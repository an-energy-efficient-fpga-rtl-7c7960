// tb_weight_buffer: loads a distinct random word at every address, then
// checks that every output array element shows the word of its address in
// the documented map, and that the deconvolution set follows the scale.
module tb_weight_buffer;
  import sr_pkg::*;
  logic clk = 0, we = 0;
  logic [WAW-1:0] waddr;
  wgt_t wdata;
  logic [2:0] cfg_scale;
  wgt_t w1 [L1_M][L1_N][L1_K][L1_K];
  act_t b1 [L1_M];
  wgt_t p1 [L1_M];
  wgt_t w2 [L2_M][L2_N][1][1];
  act_t b2 [L2_M];
  wgt_t p2 [L2_M];
  wgt_t w3 [L3_M][L3_N][L3_K][L3_K];
  act_t b3 [L3_M];
  wgt_t p3 [L3_M];
  wgt_t w4 [L4_M][L4_N][1][1];
  act_t b4 [L4_M];
  wgt_t p4 [L4_M];
  wgt_t wd [DC_N][KD][KD];
  act_t dbias;
  weight_buffer dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int mem [WA_END];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(int got, int a);
    checks++;
    if (got != mem[a]) begin
      failures++;
      if (failures < 5) $display("address %0d: %0d, expected %0d", a, got, mem[a]);
    end
  endtask

  initial begin
    cfg_scale = 3'd2;
    for (int a = 0; a < WA_END; a++) begin
      @(negedge clk);
      mem[a] = int'($urandom % 8192) - 4096;
      we = 1; waddr = WAW'(a); wdata = wgt_t'(mem[a]);
    end
    @(negedge clk); we = 0;
    for (int s = 2; s <= 4; s++) begin
      cfg_scale = 3'(s);
      #1;
      for (int m = 0; m < L1_M; m++) begin
        for (int k = 0; k < 25; k++) chk(int'(w1[m][0][k/5][k%5]), WA_L1 + m*25 + k);
        chk(int'(b1[m]), WA_B1 + m);
        chk(int'(p1[m]), WA_P1 + m);
      end
      for (int m = 0; m < L2_M; m++) begin
        for (int n = 0; n < L2_N; n++) chk(int'(w2[m][n][0][0]), WA_L2 + m*L2_N + n);
        chk(int'(b2[m]), WA_B2 + m);
        chk(int'(p2[m]), WA_P2 + m);
      end
      for (int m = 0; m < L3_M; m++) begin
        for (int n = 0; n < L3_N; n++)
          for (int k = 0; k < 9; k++) chk(int'(w3[m][n][k/3][k%3]), WA_L3 + (m*L3_N + n)*9 + k);
        chk(int'(b3[m]), WA_B3 + m);
        chk(int'(p3[m]), WA_P3 + m);
      end
      for (int m = 0; m < L4_M; m++) begin
        for (int n = 0; n < L4_N; n++) chk(int'(w4[m][n][0][0]), WA_L4 + m*L4_N + n);
        chk(int'(b4[m]), WA_B4 + m);
        chk(int'(p4[m]), WA_P4 + m);
      end
      for (int n = 0; n < DC_N; n++)
        for (int k = 0; k < KD*KD; k++)
          chk(int'(wd[n][k/KD][k%KD]), WA_DW + (s-2)*DW_SET + n*KD*KD + k);
      chk(int'(dbias), WA_DB + s - 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
