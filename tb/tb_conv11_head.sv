// tb_conv11_head: six random 64-channel pixels through the detection head.
// The 6 x 75 raw words are checked in y/x/channel order against the reference
// (Mul_prev scaling, Q1.15 weights, Q4.12 bias, rounding to 15 fractional bits,
// 32-bit saturation). The first three pixels run with an always-ready output
// and their cycle count is checked against 15 groups x (ROM_LAT + 1 + 5)
// cycles per pixel; the rest run with random backpressure. One pixel of all
// 255 is included to exercise the largest sums.
module tb_conv11_head;
  import bnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 6, CI = 64, CO = 75;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [CI-1:0][ACT_W-1:0] in_data = '0;
  logic signed [OUT_W-1:0] out_data;
  fmap_t px, exp_o;
  int checks = 0, failures = 0, nout = 0;
  logic in_acc = 1'b0;
  longint cyc = 0, t0 = 0, t3 = 0;

  conv11_head dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) cyc <= cyc + 1;
  always_ff @(posedge clk) in_acc <= in_valid && in_ready;

  always_ff @(posedge clk) if (rst_n && out_valid && out_ready && nout < N*CO) begin
    checks++;
    if (int'(out_data) != exp_o[nout]) begin
      failures++;
      $display("word %0d: got %0d expected %0d", nout, out_data, exp_o[nout]);
    end
    if (nout == 3*CO - 1) t3 = cyc;
    nout <= nout + 1;
  end

  initial begin
    px = new[N*CI];
    foreach (px[i]) px[i] = (i / CI == 4) ? 255 : int'($urandom % 256);
    exp_o = ref_head(N, px);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (CI + 6) @(negedge clk);
    t0 = cyc;
    for (int p = 0; p < N; p++) begin
      in_valid = 1'b1;
      for (int c = 0; c < CI; c++) in_data[c] = 8'(px[p*CI + c]);
      do @(negedge clk); while (!in_acc);
    end
    in_valid = 1'b0;
  end

  initial begin
    wait (rst_n);
    out_ready = 1'b1;
    while (nout < 3*CO) @(negedge clk);
    while (nout < N*CO) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
    end
    checks++;
    if (t3 - t0 < 3*15*7 || t3 - t0 > 3*15*7 + 6) begin
      failures++;
      $display("3 pixels took %0d cycles, expected about %0d", t3 - t0, 3*15*7);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
