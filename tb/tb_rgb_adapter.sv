// tb_rgb_adapter: three 4 x 4 frames of random {R,G,B} pixels into rgb_adapter
// with random input gaps and output backpressure. Checks: every output vector
// is the next input pixel split into channels R, G, B in that order; no pixel
// is lost or duplicated; full rate (one pixel per cycle) passes with both
// sides always ready; frame_err pulses exactly for the two misplaced
// end-of-frame markers (one early marker, one missing marker).
module tb_rgb_adapter;
  import bnn_pkg::*;
  localparam int H = 4, W = 4, NF = 3, N = NF * H * W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, in_last = 1'b0, out_valid, out_ready = 1'b0, frame_err;
  logic [23:0] in_rgb = '0;
  logic [2:0][ACT_W-1:0] out_data;
  logic [23:0] pix [N];
  int checks = 0, failures = 0, nout = 0, nerr = 0;
  logic in_acc = 1'b0;
  int burst_cycles = 0, burst_outs = 0;
  logic burst = 1'b0;

  rgb_adapter #(.IMG_H(H), .IMG_W(W)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) in_acc <= in_valid && in_ready;

  always_ff @(posedge clk) if (rst_n) begin
    if (frame_err) nerr <= nerr + 1;
    if (burst) burst_cycles <= burst_cycles + 1;
    if (out_valid && out_ready) begin
      if (burst) burst_outs <= burst_outs + 1;
      checks++;
      if (nout >= N || out_data != {pix[nout][7:0], pix[nout][15:8], pix[nout][23:16]}) begin
        failures++;
        $display("output %0d wrong: %h", nout, out_data);
      end
      nout <= nout + 1;
    end
  end

  initial begin
    foreach (pix[i]) pix[i] = 24'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int n = 0; n < N; n++) begin
      if (n >= H * W) while ($urandom % 3 == 0) begin in_valid = 1'b0; @(negedge clk); end
      in_valid = 1'b1;
      in_rgb   = pix[n];
      // frame 0 correct; frame 1 has an early marker on pixel 3;
      // frame 2 has no marker on its last pixel
      in_last  = (n == H*W - 1) || (n == H*W + 3) || (n == 2*H*W - 1);
      do @(negedge clk); while (!in_acc);
    end
    in_valid = 1'b0;
    in_last  = 1'b0;
  end

  initial begin
    wait (rst_n);
    // first frame: both sides always ready, must pass at full rate
    out_ready = 1'b1;
    burst = 1'b1;
    while (nout < 8) @(negedge clk);
    burst = 1'b0;
    while (nout < N) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (burst_outs != burst_cycles - 2) begin
      failures++; $display("not full rate: %0d outputs in %0d cycles", burst_outs, burst_cycles);
    end
    checks++;
    if (nerr != 2) begin failures++; $display("frame_err pulses: %0d", nerr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
