// conv11_head: the final 1x1 standard convolution (detection head, Conv11) and
// the serialiser of the raw detection tensor.
//
// Each input pixel is a CIN = 64 vector of 8-bit activations. The head first
// applies the per-input-channel scale Mul_prev (x_i = m_i * a_i, 12 fractional
// bits), then computes the 75 output channels in NGRP = 75 / PE_NUM groups of
// PE_NUM = 5 with std_conv_pe (Q1.15 weights, Q4.12 bias), and finally rounds
// each sum to 15 fractional bits and saturates it to a signed 32-bit word:
//     raw_o = sat32( round( (sum_i w_oi * x_i + b_o * 2^15) / 2^12 ) )
// i.e. a signed fixed-point value with 15 fractional bits (value = raw / 2^15).
// Outputs leave one 32-bit word per valid/ready beat, in y/x/channel order.
//
// Controller: LOAD (once after reset) reads Mul_prev[0..CIN-1]; IDLE accepts a
// pixel; for each group g: ISSUE puts g on the ROM address, WAIT covers the
// ROM_LAT read latency, CALC enables the PE, EMIT sends the group's PE_NUM
// words. Per pixel: NGRP * (ROM_LAT + 1 + PE_NUM) cycles plus output stalls.
// From the paper: 1x1 kernel, 64 -> 75 channels, Q1.15 / Q4.12 formats,
// PE_NUM = 5, 32-bit output with 15 fractional bits, y/x/channel order.
// This design's choice: applying Mul_prev to the head's input (the paper gives
// Mul_prev for W1A8 layers only), the rounding and saturation, the schedule.
module conv11_head
  import bnn_pkg::*;
#(
  parameter int unsigned LAYER   = 11,
  parameter int unsigned PE_NUM  = 5,
  parameter int unsigned ROM_LAT = 1,
  localparam int unsigned CIN    = layer_cfg(LAYER).cin,
  localparam int unsigned COUT   = layer_cfg(LAYER).cout
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [CIN-1:0][ACT_W-1:0]   in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic signed [OUT_W-1:0]     out_data
);
  localparam int unsigned NGRP  = COUT / PE_NUM;
  localparam int unsigned XW    = ACT_W + MUL_W;
  localparam int unsigned ACC_W = STD_ACC_W;
  localparam int unsigned BSH   = C11_W_FRAC + MUL_FRAC - C11_B_FRAC;  // 15
  localparam int unsigned RSH   = C11_W_FRAC + MUL_FRAC - OUT_FRAC;    // 12
  localparam int GW  = $clog2(NGRP > 1 ? NGRP : 2);
  localparam int IW  = $clog2(CIN + 1);
  localparam int PW  = $clog2(PE_NUM + 1);
  localparam int LW  = $clog2(ROM_LAT + 2);

  typedef enum logic [2:0] {S_LOAD, S_IDLE, S_ISSUE, S_WAIT, S_CALC, S_EMIT} state_e;

  state_e                     state;
  logic [IW-1:0]              lcnt;
  logic [LW-1:0]              lat;
  logic [GW-1:0]              grp;
  logic [PW-1:0]              sel;
  logic [CIN-1:0][MUL_W-1:0]  mul_q;
  logic [CIN-1:0][XW-1:0]     x_q;
  logic [MUL_W-1:0]           mword;
  logic [PE_NUM*CIN-1:0][STDW_W-1:0] wts;
  logic [PE_NUM-1:0][STDB_W-1:0]     bia;
  logic signed [PE_NUM-1:0][ACC_W-1:0] acc;
  logic signed [PE_NUM-1:0][OUT_W-1:0] raw;

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_EMIT);
  assign out_data  = raw[sel];

  // ROMs
  param_rom #(.WIDTH(MUL_W), .DEPTH(CIN), .LATENCY(ROM_LAT), .KIND(RK_MUL),
              .LAYER(LAYER)) u_mrom (.clk, .addr($clog2(CIN)'(lcnt)), .data(mword));
  param_rom #(.WIDTH(PE_NUM * CIN * STDW_W), .DEPTH(NGRP), .LATENCY(ROM_LAT), .KIND(RK_STDW),
              .LAYER(LAYER), .PE_NUM(PE_NUM)) u_wrom (.clk, .addr(grp), .data(wts));
  param_rom #(.WIDTH(PE_NUM * STDB_W), .DEPTH(NGRP), .LATENCY(ROM_LAT), .KIND(RK_STDB),
              .LAYER(LAYER), .PE_NUM(PE_NUM)) u_brom (.clk, .addr(grp), .data(bia));

  std_conv_pe #(.PE_NUM(PE_NUM), .NTERM(CIN), .XW(XW), .BIAS_SHIFT(BSH), .ACC_W(ACC_W)) u_pe (
    .clk, .en(state == S_CALC), .x(x_q), .w(wts), .b(bia), .acc(acc));

  // round to OUT_FRAC fractional bits and saturate to 32 bits
  always_comb begin
    for (int p = 0; p < PE_NUM; p++) begin
      logic signed [ACC_W-1:0] r;
      r = ($signed(acc[p]) + (ACC_W'(1) <<< (RSH - 1))) >>> RSH;
      if (r > ACC_W'(32'sh7FFF_FFFF))       raw[p] = 32'sh7FFF_FFFF;
      else if (r < -ACC_W'(33'sh8000_0000)) raw[p] = 32'sh8000_0000;
      else                                  raw[p] = r[OUT_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_LOAD;
      lcnt   <= '0;
      lat    <= '0;
      grp    <= '0;
      sel    <= '0;
    end else begin
      case (state)
        S_LOAD: begin
          // address lcnt issued this cycle; data arrives ROM_LAT cycles later
          if (lcnt < IW'(CIN)) lcnt <= lcnt + 1'b1;
          if (lat == LW'(ROM_LAT) && lcnt == IW'(CIN)) state <= S_IDLE;
          else if (lcnt == IW'(CIN)) lat <= lat + 1'b1;
        end
        S_IDLE: if (in_valid) begin
          grp   <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          lat   <= LW'(1);
          state <= (ROM_LAT == 1) ? S_CALC : S_WAIT;
        end
        S_WAIT: begin
          lat <= lat + 1'b1;
          if (lat == LW'(ROM_LAT - 1)) state <= S_CALC;
        end
        S_CALC: begin
          sel   <= '0;
          state <= S_EMIT;
        end
        S_EMIT: if (out_ready) begin
          if (sel == PW'(PE_NUM - 1)) begin
            if (grp == GW'(NGRP - 1)) begin
              state <= S_IDLE;
            end else begin
              grp   <= grp + 1'b1;
              state <= S_ISSUE;
            end
          end else begin
            sel <= sel + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Mul_prev load pipeline: a tag follows each issued address for ROM_LAT cycles
  logic [ROM_LAT-1:0] ld_v;
  logic [IW-1:0]      ld_i [ROM_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_v <= '0;
      for (int i = 0; i < int'(ROM_LAT); i++) ld_i[i] <= '0;
    end else begin
      ld_v[0] <= (state == S_LOAD) && (lcnt < IW'(CIN));
      ld_i[0] <= lcnt;
      for (int i = 1; i < int'(ROM_LAT); i++) begin
        ld_v[i] <= ld_v[i-1];
        ld_i[i] <= ld_i[i-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_v[ROM_LAT-1]) mul_q[ld_i[ROM_LAT-1][$clog2(CIN)-1:0]] <= mword;
    if (state == S_IDLE && in_valid)
      for (int i = 0; i < int'(CIN); i++) x_q[i] <= XW'(in_data[i]) * XW'(mul_q[i]);
  end

  initial assert (COUT % PE_NUM == 0) else $error("conv11_head: COUT must be a multiple of PE_NUM");
  // Handshake rule: an offered output beat stays valid (and unchanged) until taken.
  logic hs_stall_q;
  logic [$bits(out_data)-1:0] hs_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hs_stall_q <= 1'b0;
    end else begin
      if (hs_stall_q) a_hold: assert (out_valid && out_data == hs_data_q)
        else $error("%m: output beat changed before it was taken");
      hs_stall_q <= out_valid && !out_ready;
    end
  end
  always_ff @(posedge clk) hs_data_q <= out_data;
endmodule
