// tb_yolo3_tiny_top: end-to-end test of the detector at a reduced image size
// (64 x 64, giving a 2 x 2 x 75 output tensor), two frames back to back with
// random input gaps and output backpressure, checked word by word against the
// behavioural reference model. See tb_top_body.svh.
module tb_yolo3_tiny_top;
  localparam int IMG_H = 64;
  localparam int IMG_W = 64;
  localparam int NFRAMES = 2;
  localparam longint WATCHDOG = 2_000_000;
  `include "tb_top_body.svh"

  yolo3_tiny_top #(.IMG_H(IMG_H), .IMG_W(IMG_W)) u_dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_rgb, .in_last,
    .out_valid, .out_ready, .out_data, .out_last, .frame_err);
endmodule
