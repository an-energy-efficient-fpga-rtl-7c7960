// tb_prelu_engine: random neuron sums, biases and slopes with the
// activation on and off; checks bias addition, the negative-side slope,
// the floor shift, saturation to 13 bits and the two-clock latency.
module tb_prelu_engine;
  import sr_pkg::*;
  localparam int IW = 36;
  logic clk = 0, act_en;
  logic signed [IW-1:0] sum;
  act_t bias, out;
  wgt_t slope;
  prelu_engine #(.IW(IW)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, negs = 0, sats = 0;
  int exp_q [$];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      longint s, sv;
      int bv, pv, e;
      bit en;
      @(negedge clk);
      s  = longint'($signed(IW'({$urandom, $urandom}))) >>> (($urandom % 3 == 0) ? 8 : 16);
      bv = int'($urandom % 8192) - 4096;
      pv = int'($urandom % 8192) - 4096;
      en = $urandom % 4 != 0;
      sum = IW'(s); bias = act_t'(bv); slope = wgt_t'(pv); act_en = en;
      sv = s + (longint'(bv) * 1024);
      if (en && sv < 0) begin sv = (sv * pv) >>> 10; negs++; end
      sv = sv >>> 10;
      if (sv > 4095 || sv < -4096) sats++;
      e = (sv > 4095) ? 4095 : (sv < -4096) ? -4096 : int'(sv);
      exp_q.push_back(e);
      if (t >= 2) begin
        checks++;
        if (int'(out) != exp_q[t-2]) begin
          failures++;
          if (failures < 5) $display("t=%0d out %0d exp %0d", t, out, exp_q[t-2]);
        end
      end
    end
    checks++;
    if (negs == 0 || sats == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
