// tb_w1a8_pe: drives w1a8_pe with random windows, sign words and Mul_prev
// vectors (including the all-255 extreme) and compares the registered result
// with the paper's compensated sum y = sum_{k,i} s_{k,i} * (m_i * a_{k,i})
// evaluated term by term here. Also checks that `en` low holds the result.
module tb_w1a8_pe;
  import bnn_pkg::*;
  localparam int CIN = 8, KK = 9;

  logic clk = 1'b0, en = 1'b0;
  logic [KK-1:0][CIN-1:0][ACT_W-1:0] win;
  logic [KK*CIN-1:0] sgn;
  logic [CIN-1:0][MUL_W-1:0] mul;
  logic signed [W1A8_ACC_W-1:0] acc;
  int checks = 0, failures = 0;

  w1a8_pe #(.CIN(CIN), .KK(KK)) dut (.*);
  always #5 clk = ~clk;

  function automatic longint ref_acc();
    longint s;
    s = 0;
    for (int k = 0; k < KK; k++)
      for (int i = 0; i < CIN; i++)
        s += (sgn[k*CIN + i] ? 64'sd1 : -64'sd1) * longint'(mul[i]) * longint'(win[k][i]);
    return s;
  endfunction

  initial begin
    longint e;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      foreach (win[k, i]) win[k][i] = (t < 2) ? 8'd255 : 8'($urandom);
      foreach (mul[i]) mul[i] = (t < 2) ? 16'hFFFF : 16'($urandom);
      for (int j = 0; j < KK*CIN; j++) sgn[j] = (t == 0) ? 1'b1 : (t == 1) ? 1'b0 : 1'($urandom);
      en = 1'b1;
      e = ref_acc();
      @(negedge clk);
      en = 1'b0;
      checks++;
      if (longint'(acc) != e) begin
        failures++;
        $display("t=%0d got %0d expected %0d", t, acc, e);
      end
      // hold when disabled
      foreach (win[k, i]) win[k][i] = 8'($urandom);
      @(negedge clk);
      checks++;
      if (longint'(acc) != e) begin failures++; $display("t=%0d result not held", t); end
    end
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
