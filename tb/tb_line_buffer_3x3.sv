// tb_line_buffer_3x3: feeds two zero-padded 4 x 5 frames of 3-channel pixels
// (a 6 x 7 padded raster each) into line_buffer_3x3 with random gaps and
// backpressure and checks every emitted 3x3 window against windows cut from
// the frame directly. Also checks the one-cycle latency from the pixel that
// completes a window to the window.
module tb_line_buffer_3x3;
  import bnn_pkg::*;
  localparam int C = 3, H = 4, W = 5, NF = 2;
  localparam int HP = H + 2, WP = W + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [C-1:0][ACT_W-1:0] in_data = '0;
  logic [8:0][C-1:0][ACT_W-1:0] out_win;
  int checks = 0, failures = 0, nout = 0;
  logic in_acc = 1'b0;
  logic prev_take_complete = 1'b0;
  int lat_ok = 0;

  line_buffer_3x3 #(.C(C), .WP(WP), .HP(HP)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) in_acc <= in_valid && in_ready;

  // padded pixel (f, y, x)
  function automatic logic [C-1:0][ACT_W-1:0] ppix(int f, int y, int x);
    if (y == 0 || y == HP - 1 || x == 0 || x == WP - 1) return '0;
    for (int c = 0; c < C; c++) ppix[c] = 8'((f * 97 + y * 31 + x * 7 + c * 5) % 255 + 1);
  endfunction

  function automatic logic [8:0][C-1:0][ACT_W-1:0] expect_win(int k);
    int f, r, y, x;
    f = k / (H * W);
    r = k % (H * W);
    y = r / W;
    x = r % W;
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        expect_win[ky*3 + kx] = ppix(f, y + ky, x + kx);
  endfunction

  always_ff @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready && nout < NF * H * W) begin
      checks++;
      if (out_win != expect_win(nout)) begin
        failures++;
        $display("window %0d wrong", nout);
      end
      nout <= nout + 1;
    end
  end

  // latency: a window appears on the cycle after the completing pixel is taken
  always_ff @(posedge clk) if (rst_n) begin
    prev_take_complete <= in_valid && in_ready && (dut.y >= 2) && (dut.x >= 2);
    if (prev_take_complete) begin
      checks++;
      if (!out_valid) begin failures++; $display("window late"); end
      else lat_ok <= lat_ok + 1;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < HP; y++)
        for (int x = 0; x < WP; x++) begin
          while ($urandom % 4 == 0) begin in_valid = 1'b0; @(negedge clk); end
          in_valid = 1'b1;
          in_data  = ppix(f, y, x);
          do @(negedge clk); while (!in_acc);
        end
    in_valid = 1'b0;
  end

  initial begin
    wait (rst_n);
    while (nout < NF * H * W) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
    end
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
