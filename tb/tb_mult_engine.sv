// tb_mult_engine: random activations and weights, including the extreme
// 13-bit values; every registered product is compared one clock later.
module tb_mult_engine;
  import sr_pkg::*;
  localparam int NT = 9;
  logic clk = 0;
  act_t a [NT];
  wgt_t w [NT];
  prod_t p [NT];
  mult_engine #(.NT(NT)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      longint e [NT];
      @(negedge clk);
      for (int i = 0; i < NT; i++) begin
        int av, wv;
        av = int'($urandom % 8192) - 4096;
        wv = int'($urandom % 8192) - 4096;
        if (it == 0) begin av = -4096; wv = -4096; end
        if (it == 1) begin av = 4095; wv = -4096; end
        a[i] = act_t'(av); w[i] = wgt_t'(wv);
        e[i] = longint'(av) * longint'(wv);
      end
      @(posedge clk); #1;
      for (int i = 0; i < NT; i++) begin
        checks++;
        if (longint'(p[i]) != e[i]) begin
          failures++;
          if (failures < 5) $display("p[%0d]=%0d exp %0d", i, p[i], e[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
