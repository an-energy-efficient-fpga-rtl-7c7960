// sr_controller: raster timing and run-time configuration of the
// super-resolution system.
//
// The display driver delivers one LR pixel per in_valid, line by line,
// blanking positions included, and marks the first position of a frame with
// in_sof. The controller counts the raster position (x, y) of each pixel and
// flags whether it lies in the active area. It also holds the configuration
// (scale factor and frame geometry), written through cfg_we; the paper sets
// the scale through a vendor debug core, here it is a plain register port.
// A new configuration takes effect at the next start of frame, so a frame is
// never processed with two settings.
//
// Timing: out_* are registered, one clock after in_*. cfg is the setting of
// the frame currently leaving the controller.
module sr_controller
  import sr_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cfg_we,
  input  cfg_t   cfg_in,
  input  logic   in_valid,
  input  logic   in_sof,
  output logic   out_valid,
  output pos_t   out_pos,
  output logic   out_active,
  output cfg_t   cfg,
  output logic   frame_start    // one clock pulse with the first pixel of a frame
);
  cfg_t   cfg_pend;
  coord_t x_q, y_q;
  coord_t x_n, y_n;

  // position of the pixel arriving now
  always_comb begin
    if (in_sof) begin
      x_n = '0;
      y_n = '0;
    end else if (x_q + 1'b1 >= cfg.w_tot) begin
      x_n = '0;
      y_n = (y_q + 1'b1 >= cfg.h_tot) ? coord_t'(0) : coord_t'(y_q + 1'b1);
    end else begin
      x_n = coord_t'(x_q + 1'b1);
      y_n = y_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_pend    <= '{scale: 3'd2, w_act: coord_t'(1440), h_act: coord_t'(640),
                       w_tot: coord_t'(1456), h_tot: coord_t'(656)};
      cfg         <= '{scale: 3'd2, w_act: coord_t'(1440), h_act: coord_t'(640),
                       w_tot: coord_t'(1456), h_tot: coord_t'(656)};
      x_q         <= '1;
      y_q         <= '0;
      out_valid   <= 1'b0;
      out_pos     <= '0;
      out_active  <= 1'b0;
      frame_start <= 1'b0;
    end else begin
      if (cfg_we) cfg_pend <= cfg_in;
      frame_start <= in_valid && in_sof;
      out_valid   <= in_valid;
      if (in_valid) begin
        if (in_sof) cfg <= cfg_we ? cfg_in : cfg_pend;
        x_q        <= x_n;
        y_q        <= y_n;
        out_pos    <= '{x: x_n, y: y_n};
        out_active <= in_sof ? ((cfg_we ? cfg_in.w_act : cfg_pend.w_act) != 0 &&
                                (cfg_we ? cfg_in.h_act : cfg_pend.h_act) != 0)
                             : (x_n < cfg.w_act && y_n < cfg.h_act);
      end
    end
  end

  // scale factors the deconvolution weights exist for
  a_scale: assert property (@(posedge clk) disable iff (!rst_n)
                            cfg_we |-> cfg_in.scale inside {3'd2, 3'd3, 3'd4});
endmodule
