// padding_adapter: surrounds each H x W feature map of a pixel stream with a
// PAD-pixel border of zeros, so that a following 3x3 convolution keeps the
// spatial size ("same" padding).
//
// Pixels arrive in raster order, one C-channel vector per valid/ready beat, and
// leave as a (H+2*PAD) x (W+2*PAD) raster. A pair of counters walks the padded
// grid: on border positions the adapter sends zero vectors on its own (the
// input is not read); inside, the input beat is passed straight through
// (in_ready = out_ready, combinational, no added latency). Frames follow each
// other without gaps; the counters wrap at the end of each padded frame.
// The paper names this block and its job; the counter implementation and the
// zero padding value are this design's choice.
module padding_adapter
  import bnn_pkg::*;
#(
  parameter int unsigned C   = 3,
  parameter int unsigned H   = 320,
  parameter int unsigned W   = 320,
  parameter int unsigned PAD = 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [C-1:0][ACT_W-1:0]     in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [C-1:0][ACT_W-1:0]     out_data
);
  localparam int unsigned HP = H + 2 * PAD;
  localparam int unsigned WP = W + 2 * PAD;
  localparam int YW = $clog2(HP + 1);
  localparam int XW = $clog2(WP + 1);

  logic [YW-1:0] py;
  logic [XW-1:0] px;
  logic          border;

  always_comb begin
    border = (py < YW'(PAD)) || (py >= YW'(PAD + H)) || (px < XW'(PAD)) || (px >= XW'(PAD + W));
    if (border) begin
      out_valid = 1'b1;
      out_data  = '0;
      in_ready  = 1'b0;
    end else begin
      out_valid = in_valid;
      out_data  = in_data;
      in_ready  = out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      py <= '0;
      px <= '0;
    end else if (out_valid && out_ready) begin
      if (px == XW'(WP - 1)) begin
        px <= '0;
        py <= (py == YW'(HP - 1)) ? '0 : py + 1'b1;
      end else begin
        px <= px + 1'b1;
      end
    end
  end

  // Handshake rule: an offered output beat stays valid (and unchanged) until taken.
  logic hs_stall_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hs_stall_q <= 1'b0;
    end else begin
      if (hs_stall_q) a_hold: assert (out_valid)
        else $error("%m: output beat withdrawn before it was taken");
      hs_stall_q <= out_valid && !out_ready;
    end
  end
endmodule
