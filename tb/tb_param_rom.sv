// tb_param_rom: reads every address of four parameter ROMs (W1A8 signs of
// Conv3, Conv11 16-bit weights in PE_NUM = 5 groups, Mul_prev, and
// {Div_current, bias}) in random order and checks each word against the
// generator, and that it appears exactly LATENCY cycles after the address
// (1 and 2 cycles), not earlier.
module tb_param_rom;
  import bnn_pkg::*;

  logic clk = 1'b0;
  logic [5:0] a_s, a_w, a_m, a_q;
  logic [287:0] d_s;
  logic [5*64*16-1:0] d_w;
  logic [15:0] d_m;
  logic [31:0] d_q;
  int checks = 0, failures = 0;

  param_rom #(.WIDTH(288), .DEPTH(64), .LATENCY(1), .KIND(RK_SIGN), .LAYER(3)) u_s (.clk, .addr(a_s), .data(d_s));
  param_rom #(.WIDTH(5*64*16), .DEPTH(15), .LATENCY(1), .KIND(RK_STDW), .LAYER(11), .PE_NUM(5))
    u_w (.clk, .addr(a_w[3:0]), .data(d_w));
  param_rom #(.WIDTH(16), .DEPTH(64), .LATENCY(2), .KIND(RK_MUL), .LAYER(10)) u_m (.clk, .addr(a_m), .data(d_m));
  param_rom #(.WIDTH(32), .DEPTH(64), .LATENCY(2), .KIND(RK_QPAR), .LAYER(4)) u_q (.clk, .addr(a_q), .data(d_q));
  always #5 clk = ~clk;

  function automatic logic [MAX_ROM_W-1:0] w(rom_kind_e k, int l, int a, int width, int pe);
    return rom_word(k, l, a, width, pe);
  endfunction

  initial begin
    logic [MAX_ROM_W-1:0] e;
    for (int t = 0; t < 200; t++) begin
      int s, q, m, g;
      s = (t < 64) ? t : int'($urandom % 64);
      g = int'($urandom % 15);
      m = int'($urandom % 64);
      q = int'($urandom % 64);
      @(negedge clk);
      a_s = 6'(s); a_w = 6'(g); a_m = 6'(m); a_q = 6'(q);
      @(negedge clk);
      // one cycle after the address: LATENCY 1 ROMs show the word
      checks += 2;
      e = w(RK_SIGN, 3, s, 288, 1);
      if (d_s != e[287:0]) begin failures++; $display("sign rom addr %0d wrong", s); end
      for (int j = 0; j < 288; j++)
        if (d_s[j] != gen_sign(3, s, j)) begin failures++; $display("sign bit %0d/%0d", s, j); break; end
      e = w(RK_STDW, 11, g, 5120, 5);
      if (d_w != e[5119:0] || d_w[(3*64 + 7)*16 +: 16] != gen_stdw(11, g*5 + 3, 7)) begin
        failures++; $display("weight rom group %0d wrong", g);
      end
      a_s = 6'($urandom); a_w = 6'($urandom % 15); a_m = 6'($urandom); a_q = 6'($urandom);
      @(negedge clk);
      // two cycles after: LATENCY 2 ROMs show the word of the first address
      checks += 2;
      if (d_m != gen_mul(10, m)) begin failures++; $display("mul rom addr %0d wrong", m); end
      if (d_q != {gen_div(4, q), gen_qbias(4, q)}) begin failures++; $display("qpar rom addr %0d wrong", q); end
    end
    // latency-2 ROM must not show the word after one cycle, only after two
    @(negedge clk);
    a_m = 6'd7;
    repeat (3) @(negedge clk);
    a_m = 6'd5;
    @(negedge clk);
    a_m = 6'd6;
    checks++;
    if (d_m != gen_mul(10, 7)) begin failures++; $display("latency 2 ROM answered early"); end
    @(negedge clk);
    checks++;
    if (d_m != gen_mul(10, 5)) begin failures++; $display("latency 2 word missing"); end
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
