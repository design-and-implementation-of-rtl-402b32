// post_process: turns a layer's accumulator into the next 8-bit activation.
//
// Order of operations (as the paper's data-flow figure prints it):
// scale -> bias -> round -> clip.
//     t = acc * div + (bias <<< (SHIFT - QB_FRAC))
//     q = clip( (t + 2^(SHIFT-1)) >>> SHIFT , 0, 255 )
// `div` is the output channel's Div_current scale stored as an unsigned
// fixed-point multiplier with SHIFT fractional bits (a reciprocal, so no
// divider is needed); `bias` is a signed output-domain correction with
// QB_FRAC fractional bits. Rounding is half-up (add half an LSB, then an
// arithmetic shift); clipping to 0..255 realises the ReLU of the quantiser.
//
// Timing: sampled when `en` is high, `q` registered one cycle later. The paper
// gives the steps; the exact fixed-point widths, half-up rounding and
// reciprocal-multiplier form are this design's choices.
module post_process
  import bnn_pkg::*;
#(
  parameter int unsigned ACC_W = W1A8_ACC_W,
  parameter int unsigned SHIFT = W1A8_POST_SHIFT
) (
  input  logic                    clk,
  input  logic                    en,
  input  logic signed [ACC_W-1:0] acc,
  input  logic [DIV_W-1:0]        div,
  input  logic signed [QB_W-1:0]  bias,
  output logic [ACT_W-1:0]        q
);
  localparam int T_W = ACC_W + DIV_W + 2;

  logic signed [T_W-1:0] t, r;
  logic [ACT_W-1:0]      qc;

  always_comb begin
    t = T_W'(acc) * $signed({1'b0, div});
    t = t + (T_W'(bias) <<< (SHIFT - QB_FRAC));
    r = (t + (T_W'(1) <<< (SHIFT - 1))) >>> SHIFT;
    if (r < 0)                  qc = '0;
    else if (r > T_W'(255))     qc = 8'd255;
    else                        qc = r[ACT_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (en) q <= qc;
  end
endmodule
