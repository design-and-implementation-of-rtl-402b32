// maxpool_2x2: streaming 2x2 max-pooling with stride 2 on a raster pixel stream.
//
// Input: an H x W raster of C-channel 8-bit vectors, one per valid/ready beat.
// Output: the (H/2) x (W/2) raster of channel-wise maxima of each 2x2 block.
// On even columns the pixel is held in a register; on odd columns it is
// compared with the held pixel, giving the horizontal maximum of the pair.
// On even rows that maximum is stored in a row memory of W/2 entries; on odd
// rows it is compared with the stored value and the result is emitted. The
// output sits in a register until taken; the input is stalled meanwhile
// (in_ready = !out_valid || out_ready). Latency: one cycle from the fourth
// pixel of a block to the pooled pixel. H and W must be even (they are at all
// pooled layers of the network). The paper gives the 2x2 max-pool and where it
// is used; the row-memory structure is this design's choice.
module maxpool_2x2
  import bnn_pkg::*;
#(
  parameter int unsigned C = 16,
  parameter int unsigned H = 320,
  parameter int unsigned W = 320
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [C-1:0][ACT_W-1:0]  in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [C-1:0][ACT_W-1:0]  out_data
);
  localparam int YW = $clog2(H + 1);
  localparam int XW = $clog2(W + 1);
  typedef logic [C-1:0][ACT_W-1:0] pix_t;

  pix_t rowbuf [W/2];
  pix_t hold;
  pix_t hmax, vmax;
  logic [YW-1:0] y;
  logic [XW-1:0] x;
  logic take;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  always_comb begin
    for (int c = 0; c < C; c++) begin
      hmax[c] = (hold[c] > in_data[c]) ? hold[c] : in_data[c];
      vmax[c] = (rowbuf[x[XW-1:1]][c] > hmax[c]) ? rowbuf[x[XW-1:1]][c] : hmax[c];
    end
  end

  always_ff @(posedge clk) begin
    if (take && x[0] && !y[0]) rowbuf[x[XW-1:1]] <= hmax;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
      hold <= '0;
      out_valid <= 1'b0;
      out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (!x[0]) hold <= in_data;
        if (x[0] && y[0]) begin
          out_data  <= vmax;
          out_valid <= 1'b1;
        end
        if (x == XW'(W - 1)) begin
          x <= '0;
          y <= (y == YW'(H - 1)) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  initial assert (H % 2 == 0 && W % 2 == 0) else $error("maxpool_2x2: H and W must be even");
endmodule
