// tb_w1a8_backbone: the nine W1A8 layers Conv2..Conv10 on two random 64 x 64 x 16
// input maps (4 x 4 x 64 output each), with random input gaps and output
// backpressure; every output channel of every output pixel is checked against
// the reference model (layers 2..10 of tb_ref_pkg applied in sequence).
module tb_w1a8_backbone;
  import bnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 64, W = 64, NF = 2, CI = 16, CO = 64;
  localparam int NO = (H / 16) * (W / 16);

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [CI-1:0][ACT_W-1:0] in_data = '0;
  logic [CO-1:0][ACT_W-1:0] out_data;
  fmap_t img [NF];
  fmap_t exp_o [NF];
  int checks = 0, failures = 0, nout = 0, of = 0, n_stall = 0;
  logic in_acc = 1'b0;

  w1a8_backbone #(.H(H), .W(W)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) in_acc <= in_valid && in_ready;

  always_ff @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready && of < NF) begin
      for (int c = 0; c < CO; c++) begin
        checks++;
        if (int'(out_data[c]) != exp_o[of][nout*CO + c]) begin
          failures++;
          if (failures < 10)
            $display("frame %0d pixel %0d ch %0d: got %0d expected %0d", of, nout, c, out_data[c], exp_o[of][nout*CO + c]);
        end
      end
      if (nout == NO - 1) begin nout <= 0; of <= of + 1; end
      else nout <= nout + 1;
    end
  end

  initial begin
    for (int f = 0; f < NF; f++) begin
      int h, w;
      img[f] = new[H*W*CI];
      foreach (img[f][i]) img[f][i] = int'($urandom % 256);
      exp_o[f] = img[f];
      h = H;
      w = W;
      for (int unsigned l = 2; l <= 10; l++) begin
        exp_o[f] = ref_layer(l, h, w, exp_o[f]);
        if (layer_cfg(l).pool) begin h = h / 2; w = w / 2; end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NF; f++)
      for (int p = 0; p < H*W; p++) begin
        while ($urandom % 8 == 0) begin in_valid = 1'b0; @(negedge clk); end
        in_valid = 1'b1;
        for (int c = 0; c < CI; c++) in_data[c] = 8'(img[f][p*CI + c]);
        do @(negedge clk); while (!in_acc);
      end
    in_valid = 1'b0;
  end

  initial begin
    wait (rst_n);
    while (of < NF) begin
      @(negedge clk);
      out_ready = ($urandom % 8) == 0;
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("output backpressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #8000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
