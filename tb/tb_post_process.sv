// tb_post_process: random and corner accumulators, Div_current multipliers and
// biases through post_process (W1A8 and Conv1 shifts); each result is compared
// with clip(round-half-up((acc*div + bias*2^(SHIFT-8)) / 2^SHIFT), 0, 255)
// computed here with the exact rational value.
module tb_post_process;
  import bnn_pkg::*;

  logic clk = 1'b0, en = 1'b0;
  logic signed [W1A8_ACC_W-1:0] acc;
  logic [DIV_W-1:0] div;
  logic signed [QB_W-1:0] bias;
  logic [ACT_W-1:0] q1, q2;
  int checks = 0, failures = 0;
  int n_low = 0, n_high = 0, n_mid = 0;

  post_process #(.ACC_W(W1A8_ACC_W), .SHIFT(W1A8_POST_SHIFT)) dut1 (.clk, .en, .acc, .div, .bias, .q(q1));
  post_process #(.ACC_W(W1A8_ACC_W), .SHIFT(C1_POST_SHIFT))   dut2 (.clk, .en, .acc, .div, .bias, .q(q2));
  always #5 clk = ~clk;

  function automatic int expect_q(longint a, longint d, longint b, int sh);
    real v;
    longint r;
    v = (real'(a) * real'(d) + real'(b) * (2.0 ** (sh - 8))) / (2.0 ** sh);
    r = longint'($floor(v + 0.5));
    if (r < 0) return 0;
    if (r > 255) return 255;
    return int'(r);
  endfunction

  initial begin
    int e1, e2;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      case (t % 4)
        0: acc = W1A8_ACC_W'($signed(32'($urandom)) >>> ($urandom % 8));
        1: acc = W1A8_ACC_W'($signed(32'($urandom)) >>> 12);
        2: acc = W1A8_ACC_W'(int'($urandom % 200000) - 100000);
        default: acc = {$urandom, $urandom};
      endcase
      div  = 16'($urandom);
      bias = 16'($urandom);
      en = 1'b1;
      e1 = expect_q(longint'(acc), longint'(div), longint'(bias), W1A8_POST_SHIFT);
      e2 = expect_q(longint'(acc), longint'(div), longint'(bias), C1_POST_SHIFT);
      @(negedge clk);
      en = 1'b0;
      checks += 2;
      if (int'(q1) != e1) begin failures++; $display("w1a8 acc=%0d div=%0d bias=%0d got %0d exp %0d", acc, div, bias, q1, e1); end
      if (int'(q2) != e2) begin failures++; $display("conv1 acc=%0d div=%0d bias=%0d got %0d exp %0d", acc, div, bias, q2, e2); end
      if (e1 == 0) n_low++; else if (e1 == 255) n_high++; else n_mid++;
    end
    // exact half: 0.5 rounds up, -0.5 rounds to 0 (half-up)
    @(negedge clk);
    acc = 40'sd1; div = 16'd1; bias = '0; en = 1'b1;
    @(negedge clk);
    en = 1'b0;
    checks++;
    if (q2 != 8'd0) begin failures++; $display("tiny value not rounded to 0"); end
    checks++;
    if (n_low == 0 || n_high == 0 || n_mid == 0) begin failures++; $display("clip ranges not all covered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
