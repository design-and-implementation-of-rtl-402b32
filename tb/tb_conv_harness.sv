// tb_conv_harness: test harness for one conv_layer configuration (used by
// tb_conv_layer). Streams NF random frames of H x W x CIN activations into the
// layer and checks each output vector against tb_ref_pkg::ref_layer. Frame 0
// runs with a full-rate input and an always-ready output and its cycle count
// is checked against the schedule of COUT + ROM_LAT + 4 cycles per window;
// the later frames run with random input gaps and output backpressure.
module tb_conv_harness
  import bnn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned LAYER   = 2,
  parameter int unsigned H       = 4,
  parameter int unsigned W       = 4,
  parameter int unsigned ROM_LAT = 1,
  parameter int unsigned NF      = 2
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam layer_cfg_t CFG = layer_cfg(LAYER);
  localparam int CI = CFG.cin, CO = CFG.cout;
  localparam int OH = CFG.pool ? H / 2 : H, OW = CFG.pool ? W / 2 : W;

  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [CI-1:0][ACT_W-1:0] in_data = '0;
  logic [CO-1:0][ACT_W-1:0] out_data;
  fmap_t img [NF];
  fmap_t exp_o [NF];
  int nout = 0, of = 0;
  logic in_acc = 1'b0;
  longint cyc = 0, t0 = 0, t1 = 0;

  conv_layer #(.LAYER(LAYER), .H(H), .W(W), .ROM_LAT(ROM_LAT)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  always_ff @(posedge clk) cyc <= cyc + 1;
  always_ff @(posedge clk) in_acc <= in_valid && in_ready;

  int chk_d = 0, fail_d = 0;   // data checks (clocked monitor)
  int chk_t = 0, fail_t = 0;   // timing check
  assign checks   = chk_d + chk_t;
  assign failures = fail_d + fail_t;
  initial done = 1'b0;

  always_ff @(posedge clk) if (rst_n && out_valid && out_ready && of < NF) begin
    chk_d++;
    for (int c = 0; c < CO; c++)
      if (int'(out_data[c]) != exp_o[of][nout*CO + c]) begin
        fail_d++;
        $display("layer %0d frame %0d pixel %0d ch %0d: got %0d expected %0d",
                 LAYER, of, nout, c, out_data[c], exp_o[of][nout*CO + c]);
        break;
      end
    if (nout == OH*OW - 1) begin
      if (of == 0) t1 = cyc;
      nout <= 0;
      of <= of + 1;
    end else begin
      nout <= nout + 1;
    end
  end

  initial begin
    for (int f = 0; f < NF; f++) begin
      img[f] = new[H*W*CI];
      foreach (img[f][i]) img[f][i] = int'($urandom % 256);
      exp_o[f] = ref_layer(LAYER, H, W, img[f]);
    end
    wait (rst_n);
    // Mul_prev load after reset
    repeat (CI + 8) @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      if (f == 0) t0 = cyc;
      for (int p = 0; p < H*W; p++) begin
        if (f > 0) while ($urandom % 4 == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1;
        for (int c = 0; c < CI; c++) in_data[c] = 8'(img[f][p*CI + c]);
        do @(negedge clk); while (!in_acc);
      end
      in_valid = 1'b0;
    end
  end

  initial begin
    longint per, lo, hi;
    wait (rst_n);
    out_ready = 1'b1;
    while (of < 1) @(negedge clk);
    while (of < NF) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
    end
    per = longint'(CO + ROM_LAT + 4);
    lo = longint'(H*W) * per;
    hi = lo + 2 * longint'(W + 2) + 8;
    chk_t++;
    if (t1 - t0 < lo || t1 - t0 > hi) begin
      fail_t++;
      $display("layer %0d: frame took %0d cycles, expected %0d..%0d", LAYER, t1 - t0, lo, hi);
    end
    done = 1'b1;
  end
endmodule
