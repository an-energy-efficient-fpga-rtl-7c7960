// tb_sr_controller: streams three small frames with random gaps and checks
// the raster position, the active flag and the start-of-frame pulse of every
// pixel, and that a configuration written mid-frame only takes effect at
// the next start of frame. The fourth frame arrives without a start-of-frame
// flag and must follow from the raster wrapping around by itself.
module tb_sr_controller;
  import sr_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, in_valid = 0, in_sof = 0;
  cfg_t cfg_in, cfg;
  logic out_valid, out_active, frame_start;
  pos_t out_pos;
  sr_controller dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 8) $display("mismatch: %s", what);
    end
  endtask

  initial begin
    cfg_t a, b;
    a = '{scale: 3'd2, w_act: 12'd5, h_act: 12'd3, w_tot: 12'd8, h_tot: 12'd5};
    b = '{scale: 3'd3, w_act: 12'd6, h_act: 12'd4, w_tot: 12'd9, h_tot: 12'd6};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_in = a;
    @(negedge clk); cfg_we = 0;
    for (int f = 0; f < 4; f++) begin
      cfg_t c;
      c = (f == 0) ? a : b;
      for (int y = 0; y < int'(c.h_tot); y++)
        for (int x = 0; x < int'(c.w_tot); x++) begin
          @(negedge clk);
          while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
          // new setting written in the middle of frame 0
          if (f == 0 && y == 2 && x == 1) begin cfg_we = 1; cfg_in = b; end
          else cfg_we = 0;
          in_valid = 1;
          in_sof = (x == 0 && y == 0 && f < 3);
          @(posedge clk); #1;
          check(out_valid, "valid");
          check(out_pos.x == coord_t'(x) && out_pos.y == coord_t'(y),
                $sformatf("frame %0d pos (%0d,%0d) got (%0d,%0d)", f, x, y, out_pos.x, out_pos.y));
          check(out_active == (x < int'(c.w_act) && y < int'(c.h_act)), "active");
          check(frame_start == (x == 0 && y == 0 && f < 3), "frame_start");
          check(cfg == c, $sformatf("frame %0d uses scale %0d", f, cfg.scale));
        end
    end
    @(negedge clk); in_valid = 0; in_sof = 0; cfg_we = 0;
    @(posedge clk); #1;
    check(!out_valid, "valid drops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
