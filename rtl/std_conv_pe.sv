// std_conv_pe: fixed-point multiply-accumulate PE of the standard convolutions
// (Conv1 and the Conv11 detection head).
//
// For each of PE_NUM output channels p it computes
//     acc[p] = sum_j w[p][j] * x[j]  +  (b[p] <<< BIAS_SHIFT)
// over NTERM terms, with unsigned XW-bit inputs x, signed 16-bit weights and a
// signed 16-bit bias aligned to the product's binary point by BIAS_SHIFT.
// Conv1: x = Q0.8 pixels, w = Q5.11, b = Q2.14, BIAS_SHIFT = 5, so acc has 19
// fractional bits (the "DUT / 2^19" raw format). Conv11: x = Mul_prev * a (12
// fractional bits), w = Q1.15, b = Q4.12, BIAS_SHIFT = 15, so acc has 27
// fractional bits. Weight field p*NTERM + j of `w` is weight j of output p.
//
// Timing: inputs sampled when `en` is high, `acc` registered one cycle later.
// The formats and PE_NUM = 5 for Conv11 come from the paper; the single-cycle
// full-window evaluation is this design's choice.
module std_conv_pe
  import bnn_pkg::*;
#(
  parameter int unsigned PE_NUM     = 1,
  parameter int unsigned NTERM      = 27,
  parameter int unsigned XW         = 8,
  parameter int unsigned BIAS_SHIFT = 5,
  parameter int unsigned ACC_W      = STD_ACC_W
) (
  input  logic                                   clk,
  input  logic                                   en,
  input  logic [NTERM-1:0][XW-1:0]               x,
  input  logic [PE_NUM*NTERM-1:0][STDW_W-1:0]    w,
  input  logic [PE_NUM-1:0][STDB_W-1:0]          b,
  output logic signed [PE_NUM-1:0][ACC_W-1:0]    acc
);
  logic signed [ACC_W-1:0] sum [PE_NUM];

  always_comb begin
    for (int p = 0; p < PE_NUM; p++) begin
      sum[p] = ACC_W'($signed(b[p])) <<< BIAS_SHIFT;
      for (int j = 0; j < NTERM; j++)
        sum[p] = sum[p] + ACC_W'($signed(w[p*NTERM + j]) * $signed({1'b0, x[j]}));
    end
  end

  always_ff @(posedge clk) begin
    if (en)
      for (int p = 0; p < PE_NUM; p++) acc[p] <= sum[p];
  end
endmodule
