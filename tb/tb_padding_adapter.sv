// tb_padding_adapter: streams two 3 x 4 frames of 2-channel pixels through
// padding_adapter with random input gaps and output backpressure and checks
// the padded 5 x 6 rasters beat by beat (zeros on the border, the input pixels
// inside, in order), and that the input is never read on a border beat.
module tb_padding_adapter;
  import bnn_pkg::*;
  localparam int C = 2, H = 3, W = 4, NF = 2;
  localparam int HP = H + 2, WP = W + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [C-1:0][ACT_W-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0, nout = 0, nin = 0;
  logic in_acc = 1'b0;

  padding_adapter #(.C(C), .H(H), .W(W), .PAD(1)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) in_acc <= in_valid && in_ready;

  function automatic logic [C-1:0][ACT_W-1:0] pix(int n);
    for (int c = 0; c < C; c++) pix[c] = 8'((n * 7 + c * 3 + 1) % 251 + 1);
  endfunction

  // expected output k of frame f
  function automatic logic [C-1:0][ACT_W-1:0] expect_out(int k);
    int f, r, y, x;
    f = k / (HP * WP);
    r = k % (HP * WP);
    y = r / WP;
    x = r % WP;
    if (y == 0 || y == HP - 1 || x == 0 || x == WP - 1) return '0;
    return pix(f * H * W + (y - 1) * W + (x - 1));
  endfunction

  always_ff @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready && nout < NF * HP * WP) begin
      checks++;
      if (out_data != expect_out(nout)) begin
        failures++;
        $display("beat %0d: got %h expected %h", nout, out_data, expect_out(nout));
      end
      nout <= nout + 1;
    end
    if (in_valid && in_ready) nin <= nin + 1;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NF * H * W; n++) begin
      while ($urandom % 3 == 0) begin in_valid = 1'b0; @(negedge clk); end
      in_valid = 1'b1;
      in_data  = pix(n);
      do @(negedge clk); while (!in_acc);
    end
    in_valid = 1'b0;
  end

  initial begin
    wait (rst_n);
    while (nout < NF * HP * WP) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
    end
    repeat (2) @(negedge clk);
    checks++;
    if (nin != NF * H * W) begin failures++; $display("read %0d inputs", nin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
