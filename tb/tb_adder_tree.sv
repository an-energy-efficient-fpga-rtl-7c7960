// tb_adder_tree: feeds a new random input set every clock into trees of 9,
// 25 and 1 inputs and checks each sum after the documented latency
// (4, 5 and 1 clocks).
module tb_adder_tree;
  localparam int IW = 26;
  logic clk = 0;
  logic signed [IW-1:0] in9 [9];
  logic signed [IW-1:0] in25 [25];
  logic signed [IW-1:0] in1 [1];
  logic signed [IW+3:0] s9;
  logic signed [IW+4:0] s25;
  logic signed [IW:0]   s1;
  adder_tree #(.N(9),  .IW(IW), .OW(IW+4)) u9  (.clk, .in(in9),  .sum(s9));
  adder_tree #(.N(25), .IW(IW), .OW(IW+5)) u25 (.clk, .in(in25), .sum(s25));
  adder_tree #(.N(1),  .IW(IW), .OW(IW+1)) u1  (.clk, .in(in1),  .sum(s1));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint e9 [$], e25 [$], e1 [$];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rv();
    return longint'($signed(IW'({$urandom, $urandom})));
  endfunction

  initial begin
    for (int t = 0; t < 400; t++) begin
      longint a9, a25, a1;
      @(negedge clk);
      a9 = 0; a25 = 0;
      for (int i = 0; i < 9; i++)  begin in9[i]  = IW'(rv()); a9  += longint'(in9[i]); end
      for (int i = 0; i < 25; i++) begin in25[i] = IW'(rv()); a25 += longint'(in25[i]); end
      in1[0] = IW'(rv()); a1 = longint'(in1[0]);
      e9.push_back(a9); e25.push_back(a25); e1.push_back(a1);
      // compare outputs that have had their latency
      if (t >= 4) begin checks++; if (longint'(s9)  != e9[t-4])  failures++; end
      if (t >= 5) begin checks++; if (longint'(s25) != e25[t-5]) failures++; end
      if (t >= 1) begin checks++; if (longint'(s1)  != e1[t-1])  failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
