// w1a8_backbone: the nine W1A8 convolution layers Conv2..Conv10 in a stream.
//
// Each layer is a conv_layer instance; they are chained with valid/ready
// handshakes, so all nine work concurrently on different parts of the frame
// and a stalled layer holds back the ones before it. Spatial sizes follow from
// the input size H x W (160 x 160 at a 320 x 320 image): 2x2 max-pools after
// Conv2, Conv3, Conv4 and Conv7 give H/16 x W/16 at the output (10 x 10).
// Channel counts: 16 -> 32 -> 64 -> 128 -> 128 -> 128 -> 128 -> 128 -> 64 -> 64;
// Conv9 is 1x1, the rest 3x3 (paper's Table 1). Latency is dominated by the
// line-buffer fill of each 3x3 layer (about two rows) and by each layer's
// COUT + ROM_LAT + 4 cycles per window.
module w1a8_backbone
  import bnn_pkg::*;
#(
  parameter int unsigned H       = 160,
  parameter int unsigned W       = 160,
  parameter int unsigned ROM_LAT = 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic [layer_cfg(2).cin-1:0][ACT_W-1:0] in_data,
  output logic                                   out_valid,
  input  logic                                   out_ready,
  output logic [layer_cfg(10).cout-1:0][ACT_W-1:0] out_data
);
  // spatial input size of each layer 2..10
  function automatic int unsigned div_of(int unsigned l);
    int unsigned d;
    d = 1;
    for (int unsigned k = 2; k < l; k++) if (layer_cfg(k).pool) d = d * 2;
    return d;
  endfunction

  localparam int unsigned MAXC = 128;

  logic [10:1]                 v, r;
  logic [MAXC-1:0][ACT_W-1:0]  d [11];

  assign v[1]    = in_valid;
  assign in_ready = r[1];
  assign d[1]    = (MAXC*ACT_W)'(in_data);

  for (genvar l = 2; l <= 10; l++) begin : g_layer
    localparam int unsigned CI = layer_cfg(l).cin;
    localparam int unsigned CO = layer_cfg(l).cout;
    logic [CO-1:0][ACT_W-1:0] o;
    conv_layer #(.LAYER(l), .H(H / div_of(l)), .W(W / div_of(l)), .ROM_LAT(ROM_LAT)) u_conv (
      .clk, .rst_n,
      .in_valid(v[l-1]), .in_ready(r[l-1]), .in_data(d[l-1][CI-1:0]),
      .out_valid(v[l]), .out_ready(r[l]), .out_data(o));
    assign d[l] = (MAXC*ACT_W)'(o);
  end

  assign out_valid = v[10];
  assign r[10]     = out_ready;
  assign out_data  = d[10][layer_cfg(10).cout-1:0];
endmodule
