// tb_conv_layer: conv_layer in four configurations, each checked against the
// reference model: Conv1 (standard 3x3, 3->16, max-pool, 6x6), Conv2 (W1A8
// 3x3, 16->32, max-pool, 4x4) with a 2-cycle ROM latency, Conv5 (W1A8 3x3,
// 128->128, no pool, 3x3 map) and Conv9 (W1A8 1x1, 128->64, 2x2 map).
module tb_conv_layer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] done;
  int ch [4];
  int fl [4];
  int checks, failures;

  tb_conv_harness #(.LAYER(1), .H(6), .W(6), .ROM_LAT(1)) h1 (.clk, .rst_n, .done(done[0]), .checks(ch[0]), .failures(fl[0]));
  tb_conv_harness #(.LAYER(2), .H(4), .W(4), .ROM_LAT(2)) h2 (.clk, .rst_n, .done(done[1]), .checks(ch[1]), .failures(fl[1]));
  tb_conv_harness #(.LAYER(5), .H(3), .W(3), .ROM_LAT(1)) h5 (.clk, .rst_n, .done(done[2]), .checks(ch[2]), .failures(fl[2]));
  tb_conv_harness #(.LAYER(9), .H(2), .W(2), .ROM_LAT(1)) h9 (.clk, .rst_n, .done(done[3]), .checks(ch[3]), .failures(fl[3]));

  always #5 clk = ~clk;

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    wait (&done);
    @(negedge clk);
    checks = ch[0] + ch[1] + ch[2] + ch[3];
    failures = fl[0] + fl[1] + fl[2] + fl[3];
    $display("checks per configuration: %0d %0d %0d %0d", ch[0], ch[1], ch[2], ch[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    checks = ch[0] + ch[1] + ch[2] + ch[3];
    failures = fl[0] + fl[1] + fl[2] + fl[3] + 1;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
