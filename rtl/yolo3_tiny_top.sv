// yolo3_tiny_top: the complete W1A8 YOLOv3-tiny-like detector.
//
// An IMG_H x IMG_W RGB image (320 x 320 by default) enters as a raster stream of
// 24-bit pixels with valid/ready and an end-of-frame marker; the raw detection
// tensor of (IMG_H/32) x (IMG_W/32) x 75 signed 32-bit words (15 fractional
// bits) leaves as a valid/ready stream in y/x/channel order, with `out_last` on
// the last word of a frame. Data path:
//   rgb_adapter -> Conv1 (standard 3x3, 3->16, max-pool)
//               -> w1a8_backbone (Conv2..Conv10, W1A8)
//               -> conv11_head (standard 1x1, 64->75, PE_NUM = 5).
// Every stage is a streaming block joined by valid/ready, so the layers run
// concurrently and backpressure from the output reaches the input. All
// parameters sit in ROMs inside the layers. A frame takes about
// IMG_H*IMG_W*(16 + ROM_LAT + 4) cycles, set by Conv1, the slowest stage.
// `frame_err` reports an input end-of-frame marker in the wrong place.
// The paper gives this block order, the interface styles and the sizes; the
// frame marker and the error flag are this design's choices.
module yolo3_tiny_top
  import bnn_pkg::*;
#(
  parameter int unsigned IMG_H   = 320,
  parameter int unsigned IMG_W   = 320,
  parameter int unsigned ROM_LAT = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // RGB pixel stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [23:0]              in_rgb,
  input  logic                     in_last,
  // raw detection tensor stream
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [OUT_W-1:0]  out_data,
  output logic                     out_last,
  // status
  output logic                     frame_err
);
  localparam int unsigned OH = IMG_H / 32;
  localparam int unsigned OW = IMG_W / 32;
  localparam int unsigned NOUT = OH * OW * NUM_CLASSES_X_ANCH;
  localparam int OCW = $clog2(NOUT + 1);

  logic                                  a_valid, a_ready;
  logic [2:0][ACT_W-1:0]                 a_data;
  logic                                  c1_valid, c1_ready;
  logic [layer_cfg(1).cout-1:0][ACT_W-1:0]  c1_data;
  logic                                  bb_valid, bb_ready;
  logic [layer_cfg(10).cout-1:0][ACT_W-1:0] bb_data;

  rgb_adapter #(.IMG_H(IMG_H), .IMG_W(IMG_W)) u_rgb (
    .clk, .rst_n, .in_valid, .in_ready, .in_rgb, .in_last,
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data), .frame_err);

  conv_layer #(.LAYER(1), .H(IMG_H), .W(IMG_W), .ROM_LAT(ROM_LAT)) u_conv1 (
    .clk, .rst_n,
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data),
    .out_valid(c1_valid), .out_ready(c1_ready), .out_data(c1_data));

  w1a8_backbone #(.H(IMG_H / 2), .W(IMG_W / 2), .ROM_LAT(ROM_LAT)) u_backbone (
    .clk, .rst_n,
    .in_valid(c1_valid), .in_ready(c1_ready), .in_data(c1_data),
    .out_valid(bb_valid), .out_ready(bb_ready), .out_data(bb_data));

  conv11_head #(.LAYER(11), .PE_NUM(5), .ROM_LAT(ROM_LAT)) u_head (
    .clk, .rst_n,
    .in_valid(bb_valid), .in_ready(bb_ready), .in_data(bb_data),
    .out_valid, .out_ready, .out_data);

  // end-of-frame marker on the output stream
  logic [OCW-1:0] ocnt;
  assign out_last = out_valid && (ocnt == OCW'(NOUT - 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ocnt <= '0;
    else if (out_valid && out_ready) ocnt <= (ocnt == OCW'(NOUT - 1)) ? '0 : ocnt + 1'b1;
  end

  initial assert (IMG_H % 32 == 0 && IMG_W % 32 == 0)
    else $error("yolo3_tiny_top: image size must be a multiple of 32");
endmodule
