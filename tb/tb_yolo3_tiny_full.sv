// tb_yolo3_tiny_full: one complete 320 x 320 frame through yolo3_tiny_top at its
// default parameters, output (10 x 10 x 75 words) checked against the
// behavioural reference model. See tb_top_body.svh.
module tb_yolo3_tiny_full;
  localparam int IMG_H = 320;
  localparam int IMG_W = 320;
  localparam int NFRAMES = 1;
  localparam longint WATCHDOG = 8_000_000;
  `include "tb_top_body.svh"

  yolo3_tiny_top u_dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_rgb, .in_last,
    .out_valid, .out_ready, .out_data, .out_last, .frame_err);
endmodule
