// line_buffer_3x3: turns a padded raster pixel stream into 3x3 sliding windows.
//
// Input: a WP x HP raster (the output of padding_adapter, WP = W+2, HP = H+2),
// one C-channel vector per valid/ready beat. Two line memories of WP entries
// hold the two previous rows; with the incoming pixel they form one 3-pixel
// column, which is shifted into a 3x3 register window. Once at least three
// rows and three columns of the padded frame have been seen (x >= 2, y >= 2),
// every accepted input produces one window, so the output is the H x W raster
// of windows of a stride-1 3x3 convolution.
//
// Window layout: win[ky*3 + kx][c], ky = 0 is the oldest row, kx = 0 the left
// column. The window is held in an output register (out_valid) until taken;
// while it is not taken the input is stalled (in_ready = !out_valid ||
// out_ready), so backpressure passes upstream. Latency: one cycle from the
// accepted pixel to its window. The line memories are read and written at the
// same address in one cycle (read-first), which maps to LUT RAM or block RAM.
// The paper gives the name, the two-line buffering (Table 2 sizes line buffers
// as 2 x W x C) and the job; the register details are this design's choice.
module line_buffer_3x3
  import bnn_pkg::*;
#(
  parameter int unsigned C  = 3,
  parameter int unsigned WP = 322,
  parameter int unsigned HP = 322
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  output logic                           in_ready,
  input  logic [C-1:0][ACT_W-1:0]        in_data,
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [8:0][C-1:0][ACT_W-1:0]   out_win
);
  localparam int YW = $clog2(HP + 1);
  localparam int XW = $clog2(WP + 1);

  typedef logic [C-1:0][ACT_W-1:0] pix_t;

  pix_t lb0 [WP];   // row y-1
  pix_t lb1 [WP];   // row y-2
  pix_t col [3][3]; // col[kx][ky]

  logic [YW-1:0] y;
  logic [XW-1:0] x;
  logic          take;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;

  // line memories (no reset: contents are overwritten before they are used)
  always_ff @(posedge clk) begin
    if (take) begin
      lb1[x] <= lb0[x];
      lb0[x] <= in_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y         <= '0;
      x         <= '0;
      out_valid <= 1'b0;
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++) col[i][j] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        col[0] <= col[1];
        col[1] <= col[2];
        col[2][0] <= lb1[x];
        col[2][1] <= lb0[x];
        col[2][2] <= in_data;
        out_valid <= (y >= YW'(2)) && (x >= XW'(2));
        if (x == XW'(WP - 1)) begin
          x <= '0;
          y <= (y == YW'(HP - 1)) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  always_comb
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        out_win[ky*3 + kx] = col[kx][ky];

  // Handshake rule: an offered output beat stays valid until taken.
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
