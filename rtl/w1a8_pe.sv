// w1a8_pe: W1A8 processing element with fused input-channel scale compensation.
//
// Computes, for one output channel o and one window of KK positions x CIN
// input channels,
//     acc = sum_i m_i * ( sum_k s[k][i] * a[k][i] ),   s in {-1,+1}, a in 0..255
// which equals the paper's compensated accumulation y_o = sum s_{o,i} (m_i a_i)
// exactly (Mul_prev m_i is per input channel, so it factors out of the sum over
// kernel positions). The inner sum is sign-controlled addition/subtraction
// only (no multiplier); each input channel then needs one multiplication by its
// unsigned fixed-point Mul_prev (MUL_FRAC fractional bits), so a 3x3 layer
// uses CIN multipliers instead of 9*CIN. Sign bit encoding: 1 = +1, 0 = -1.
// Sign bit j = k*CIN + i of `sgn` belongs to position k, channel i.
//
// Timing: inputs are sampled when `en` is high; `acc` is registered, one cycle
// later. The sign-controlled accumulation and the Mul_prev fusion follow the
// paper; the factored evaluation order and the widths are this design's.
module w1a8_pe
  import bnn_pkg::*;
#(
  parameter int unsigned CIN   = 16,
  parameter int unsigned KK    = 9,
  parameter int unsigned ACC_W = W1A8_ACC_W
) (
  input  logic                              clk,
  input  logic                              en,
  input  logic [KK-1:0][CIN-1:0][ACT_W-1:0] win,
  input  logic [KK*CIN-1:0]                 sgn,
  input  logic [CIN-1:0][MUL_W-1:0]         mul,
  output logic signed [ACC_W-1:0]           acc
);
  // |inner sum| <= KK * 255 < 2^12 for KK = 9
  localparam int PS_W = ACT_W + $clog2(KK + 1) + 1;

  logic signed [PS_W-1:0]  part [CIN];
  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < CIN; i++) begin
      part[i] = '0;
      for (int k = 0; k < KK; k++) begin
        if (sgn[k*CIN + i]) part[i] = part[i] + PS_W'($signed({1'b0, win[k][i]}));
        else                part[i] = part[i] - PS_W'($signed({1'b0, win[k][i]}));
      end
      sum = sum + ACC_W'(part[i] * $signed({1'b0, mul[i]}));
    end
  end

  always_ff @(posedge clk) begin
    if (en) acc <= sum;
  end
endmodule
