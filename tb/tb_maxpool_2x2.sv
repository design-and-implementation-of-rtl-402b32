// tb_maxpool_2x2: three random 8 x 10 frames of 3-channel pixels through
// maxpool_2x2 with random gaps and backpressure; every pooled pixel is
// compared with the maximum of its 2x2 block computed here.
module tb_maxpool_2x2;
  import bnn_pkg::*;
  localparam int C = 3, H = 8, W = 10, NF = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [C-1:0][ACT_W-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0, nout = 0;
  logic in_acc = 1'b0;
  logic [ACT_W-1:0] img [NF][H][W][C];

  maxpool_2x2 #(.C(C), .H(H), .W(W)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) in_acc <= in_valid && in_ready;

  function automatic logic [C-1:0][ACT_W-1:0] expect_out(int k);
    int f, r, y, x;
    f = k / ((H/2) * (W/2));
    r = k % ((H/2) * (W/2));
    y = r / (W/2);
    x = r % (W/2);
    for (int c = 0; c < C; c++) begin
      expect_out[c] = 0;
      for (int dy = 0; dy < 2; dy++)
        for (int dx = 0; dx < 2; dx++)
          if (img[f][2*y+dy][2*x+dx][c] > expect_out[c]) expect_out[c] = img[f][2*y+dy][2*x+dx][c];
    end
  endfunction

  always_ff @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready && nout < NF * H * W / 4) begin
      for (int c = 0; c < C; c++) begin
        checks++;
        if (out_data[c] != expect_out(nout)[c]) begin
          failures++;
          $display("pool %0d ch %0d: got %h expected %h", nout, c, out_data[c], expect_out(nout)[c]);
        end
      end
      nout <= nout + 1;
    end
  end

  initial begin
    foreach (img[f, y, x, c]) img[f][y][x][c] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          while ($urandom % 4 == 0) begin in_valid = 1'b0; @(negedge clk); end
          in_valid = 1'b1;
          for (int c = 0; c < C; c++) in_data[c] = img[f][y][x][c];
          do @(negedge clk); while (!in_acc);
        end
    in_valid = 1'b0;
  end

  initial begin
    wait (rst_n);
    while (nout < NF * H * W / 4) begin
      @(negedge clk);
      out_ready = ($urandom % 2) != 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
