// rgb_adapter: the detector's RGB input interface.
//
// Accepts a raster stream of 24-bit pixels {R, G, B} (8 bits each, R in the
// top byte) over an AXI-stream-like valid/ready handshake with an end-of-frame
// marker `in_last`, and delivers 3-channel vectors (channel 0 = R, 1 = G,
// 2 = B) to Conv1. Each 8-bit value is taken as a Q0.8 fixed-point number,
// value / 256, which is how the hardware approximates the software input
// normalisation x / 255.
//
// The adapter is a two-entry skid buffer, so in_ready is a register (it does
// not depend combinationally on out_ready) and a full-rate stream passes
// without bubbles. It counts pixels to know where a frame ends: `frame_err`
// pulses for one cycle when in_last arrives on any pixel other than the last
// of an IMG_H x IMG_W frame, or is missing on the last one. The pixel counter
// restarts at every frame. Latency: one cycle.
// The paper gives a valid/ready RGB stream of 320 x 320 x 3 and the Q0.8 input
// format; the skid buffer, the byte order and the frame check are this
// design's choices.
module rgb_adapter
  import bnn_pkg::*;
#(
  parameter int unsigned IMG_H = 320,
  parameter int unsigned IMG_W = 320
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [23:0]             in_rgb,
  input  logic                    in_last,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [2:0][ACT_W-1:0]   out_data,
  output logic                    frame_err
);
  localparam int unsigned NPIX = IMG_H * IMG_W;
  localparam int PCW = $clog2(NPIX + 1);

  typedef logic [2:0][ACT_W-1:0] pix_t;

  pix_t          main_q, skid_q;
  logic          main_v, skid_v;
  logic [PCW-1:0] pcnt;
  logic          take;
  pix_t          in_pix;

  assign in_pix   = {in_rgb[7:0], in_rgb[15:8], in_rgb[23:16]};  // [2]=B [1]=G [0]=R
  assign take     = in_valid && in_ready;
  assign out_valid = main_v;
  assign out_data  = main_q;

  pix_t main_n, skid_n;
  logic main_vn, skid_vn;

  always_comb begin
    main_n  = main_q;
    skid_n  = skid_q;
    main_vn = main_v;
    skid_vn = skid_v;
    if (main_v && out_ready) main_vn = 1'b0;          // head consumed
    if (!main_vn && skid_vn) begin                    // skid moves up
      main_n  = skid_q;
      main_vn = 1'b1;
      skid_vn = 1'b0;
    end
    if (take) begin                                   // new beat joins the tail
      if (!main_vn) begin
        main_n  = in_pix;
        main_vn = 1'b1;
      end else begin
        skid_n  = in_pix;
        skid_vn = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      main_v    <= 1'b0;
      skid_v    <= 1'b0;
      main_q    <= '0;
      skid_q    <= '0;
      in_ready  <= 1'b0;
      pcnt      <= '0;
      frame_err <= 1'b0;
    end else begin
      main_v   <= main_vn;
      skid_v   <= skid_vn;
      main_q   <= main_n;
      skid_q   <= skid_n;
      in_ready <= !skid_vn;
      // framing
      frame_err <= 1'b0;
      if (take) begin
        if (in_last != (pcnt == PCW'(NPIX - 1))) frame_err <= 1'b1;
        pcnt <= (pcnt == PCW'(NPIX - 1)) ? '0 : pcnt + 1'b1;
      end
    end
  end

  // Handshake rule: an offered output beat stays valid (and unchanged) until taken.
  logic hs_stall_q;
  logic [$bits(out_data)-1:0] hs_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hs_stall_q <= 1'b0;
    end else begin
      if (hs_stall_q) a_hold: assert (out_valid && out_data == hs_data_q)
        else $error("%m: output beat changed before it was taken");
      if (take) a_no_overflow: assert (!skid_v) else $error("%m: skid buffer overflow");
      hs_stall_q <= out_valid && !out_ready;
    end
  end
  always_ff @(posedge clk) hs_data_q <= out_data;
endmodule
