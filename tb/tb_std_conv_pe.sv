// tb_std_conv_pe: checks std_conv_pe in its two configurations, Conv1
// (1 output, 27 terms of 8-bit pixels, bias shift 5) and the Conv11 head
// (5 outputs, 64 terms of 24-bit scaled activations, bias shift 15), against a
// term-by-term sum computed here, with random and extreme operands.
module tb_std_conv_pe;
  import bnn_pkg::*;

  logic clk = 1'b0, en = 1'b0;
  // Conv1 shape
  logic [26:0][7:0] x1;
  logic [26:0][STDW_W-1:0] w1;
  logic [0:0][STDB_W-1:0] b1;
  logic signed [0:0][STD_ACC_W-1:0] a1;
  // Conv11 shape
  logic [63:0][23:0] x2;
  logic [5*64-1:0][STDW_W-1:0] w2;
  logic [4:0][STDB_W-1:0] b2;
  logic signed [4:0][STD_ACC_W-1:0] a2;
  int checks = 0, failures = 0;

  std_conv_pe #(.PE_NUM(1), .NTERM(27), .XW(8), .BIAS_SHIFT(5)) dut1 (
    .clk, .en, .x(x1), .w(w1), .b(b1), .acc(a1));
  std_conv_pe #(.PE_NUM(5), .NTERM(64), .XW(24), .BIAS_SHIFT(15)) dut2 (
    .clk, .en, .x(x2), .w(w2), .b(b2), .acc(a2));
  always #5 clk = ~clk;

  initial begin
    longint e1, e2 [5];
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      foreach (x1[j]) x1[j] = (t == 0) ? 8'd255 : 8'($urandom);
      foreach (w1[j]) w1[j] = (t == 0) ? 16'h8000 : 16'($urandom);
      b1[0] = (t == 0) ? 16'h8000 : 16'($urandom);
      foreach (x2[j]) x2[j] = (t == 0) ? 24'hFFFFFF : 24'($urandom);
      foreach (w2[j]) w2[j] = (t == 0) ? 16'h7FFF : 16'($urandom);
      foreach (b2[p]) b2[p] = 16'($urandom);
      e1 = longint'($signed(b1[0])) * 32;
      for (int j = 0; j < 27; j++) e1 += longint'($signed(w1[j])) * longint'(x1[j]);
      for (int p = 0; p < 5; p++) begin
        e2[p] = longint'($signed(b2[p])) * 32768;
        for (int j = 0; j < 64; j++) e2[p] += longint'($signed(w2[p*64 + j])) * longint'(x2[j]);
      end
      en = 1'b1;
      @(negedge clk);
      en = 1'b0;
      checks++;
      if (longint'($signed(a1[0])) != e1) begin failures++; $display("conv1 t=%0d got %0d exp %0d", t, $signed(a1[0]), e1); end
      for (int p = 0; p < 5; p++) begin
        checks++;
        if (longint'($signed(a2[p])) != e2[p]) begin failures++; $display("conv11 t=%0d p=%0d got %0d exp %0d", t, p, $signed(a2[p]), e2[p]); end
      end
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
