// bnn_pkg: shared constants, types and parameter generators of the W1A8
// YOLOv3-tiny-like detector.
//
// The network has eleven convolutions. Conv1 (3->16, 3x3) and Conv11 (64->75,
// 1x1, detection head) are fixed-point standard convolutions; Conv2..Conv10 are
// W1A8 layers (1-bit weight signs, 8-bit unsigned activations). 2x2 max-pooling
// follows Conv1, Conv2, Conv3, Conv4 and Conv7. The layer table, the Q formats
// (Conv1 weights Q5.11 / bias Q2.14, Conv11 weights Q1.15 / bias Q4.12, Q0.8
// input pixels, 32-bit Q.15 raw output) follow the paper.
//
// The trained parameters are not available, so every parameter ROM is filled
// either from a $readmemh file or, by default, by the deterministic generators
// at the end of this package (a 32-bit integer hash). They produce weights of
// the right format and magnitude, so the datapath exercises its full range, but
// they are not a trained detector. Testbenches use the same generators to know
// the parameter values and compute the expected results on their own.
package bnn_pkg;

  // ---------------------------------------------------------------- formats
  localparam int ACT_W      = 8;    // activation width (unsigned, 0..255)
  localparam int MUL_W      = 16;   // Mul_prev width (unsigned fixed point)
  localparam int MUL_FRAC   = 12;   // Mul_prev fractional bits
  localparam int DIV_W      = 16;   // Div_current multiplier width (unsigned)
  localparam int QB_W       = 16;   // post-process bias width (signed)
  localparam int QB_FRAC    = 8;    // post-process bias fractional bits
  localparam int STDW_W     = 16;   // standard-conv weight width (signed)
  localparam int STDB_W     = 16;   // standard-conv bias width (signed)
  localparam int C1_W_FRAC  = 11;   // Conv1 weights Q5.11
  localparam int C1_B_FRAC  = 14;   // Conv1 bias Q2.14
  localparam int PIX_FRAC   = 8;    // input pixels Q0.8
  localparam int C11_W_FRAC = 15;   // Conv11 weights Q1.15
  localparam int C11_B_FRAC = 12;   // Conv11 bias Q4.12
  localparam int OUT_FRAC   = 15;   // raw output: signed 32-bit, 15 fractional bits
  localparam int OUT_W      = 32;

  localparam int NUM_CLASSES_X_ANCH = 75; // 3 anchors x (5 + 20 VOC classes)

  // Accumulator widths (wide enough for the largest layer, see README).
  localparam int W1A8_ACC_W = 40;
  localparam int STD_ACC_W  = 48;

  // Post-process right shift, per layer kind.
  localparam int C1_POST_SHIFT   = 24;
  localparam int W1A8_POST_SHIFT = 32;

  // ------------------------------------------------------------ layer table
  typedef struct packed {
    int unsigned cin;
    int unsigned cout;
    int unsigned k;       // kernel size, 1 or 3
    bit          pool;    // 2x2 max-pool after the layer
    bit          binary;  // W1A8 layer
  } layer_cfg_t;

  localparam int NUM_LAYERS = 11;

  // index 1..11 = Conv1..Conv11 (index 0 unused)
  function automatic layer_cfg_t layer_cfg(int unsigned l);
    case (l)
      1:  return '{cin:   3, cout:  16, k: 3, pool: 1'b1, binary: 1'b0};
      2:  return '{cin:  16, cout:  32, k: 3, pool: 1'b1, binary: 1'b1};
      3:  return '{cin:  32, cout:  64, k: 3, pool: 1'b1, binary: 1'b1};
      4:  return '{cin:  64, cout: 128, k: 3, pool: 1'b1, binary: 1'b1};
      5:  return '{cin: 128, cout: 128, k: 3, pool: 1'b0, binary: 1'b1};
      6:  return '{cin: 128, cout: 128, k: 3, pool: 1'b0, binary: 1'b1};
      7:  return '{cin: 128, cout: 128, k: 3, pool: 1'b1, binary: 1'b1};
      8:  return '{cin: 128, cout: 128, k: 3, pool: 1'b0, binary: 1'b1};
      9:  return '{cin: 128, cout:  64, k: 1, pool: 1'b0, binary: 1'b1};
      10: return '{cin:  64, cout:  64, k: 3, pool: 1'b0, binary: 1'b1};
      11: return '{cin:  64, cout:  75, k: 1, pool: 1'b0, binary: 1'b0};
      default: return '{cin: 1, cout: 1, k: 1, pool: 1'b0, binary: 1'b0};
    endcase
  endfunction

  // ------------------------------------------------------- ROM kinds
  typedef enum logic [2:0] {
    RK_SIGN = 3'd0,  // W1A8 weight signs, 1 bit each (1 = +1, 0 = -1)
    RK_MUL  = 3'd1,  // Mul_prev, one MUL_W word per input channel
    RK_QPAR = 3'd2,  // post-process {Div_current, bias}, per output channel
    RK_STDW = 3'd3,  // standard-conv weights, STDW_W each
    RK_STDB = 3'd4   // standard-conv biases, STDB_W each
  } rom_kind_e;

  localparam int MAX_ROM_W = 5120;  // Conv11: 5 x 64 x 16 bits

  // ----------------------------------------------- placeholder generators
  // 32-bit integer hash (lowbias32 finaliser) of two keys.
  function automatic logic [31:0] prand(int unsigned a, int unsigned b);
    logic [31:0] x;
    x = a * 32'h9E3779B9 + b + 32'h7F4A7C15;
    x = x ^ (x >> 16);
    x = x * 32'h7FEB352D;
    x = x ^ (x >> 15);
    x = x * 32'h846CA68B;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic int unsigned key(int unsigned layer, rom_kind_e kind);
    return layer * 8 + int'(kind);
  endfunction

  // W1A8 signs of output channel o, terms 32*c .. 32*c+31 (term j = k*cin + i;
  // bit j%32 of chunk j/32)
  function automatic logic [31:0] gen_sign32(int unsigned layer, int unsigned o, int unsigned c);
    return prand(key(layer, RK_SIGN), o * 4096 + c);
  endfunction

  function automatic logic gen_sign(int unsigned layer, int unsigned o, int unsigned j);
    logic [31:0] r;
    r = gen_sign32(layer, o, j / 32);
    return r[j % 32];
  endfunction

  // Mul_prev of input channel i: 0.75 .. 1.25 in Q.12
  function automatic logic [MUL_W-1:0] gen_mul(int unsigned layer, int unsigned i);
    logic [31:0] r;
    r = prand(key(layer, RK_MUL), i);
    return MUL_W'(3072 + 32'(r[23:8] % 16'd2048));
  endfunction

  // integer square root (for scale choice)
  function automatic int unsigned isqrt(int unsigned v);
    int unsigned s;
    s = 0;
    while ((s + 1) * (s + 1) <= v) s++;
    return s;
  endfunction

  // Div_current multiplier of output channel o. Chosen so that a layer's
  // output spreads over the 8-bit range for typical inputs.
  function automatic logic [DIV_W-1:0] gen_div(int unsigned layer, int unsigned o);
    logic [31:0] r;
    longint unsigned base;
    layer_cfg_t c;
    c = layer_cfg(layer);
    r = prand(key(layer, RK_QPAR), o);
    if (c.binary)
      // acc ~ sqrt(N) * 110 * 4096; target spread ~ 48 LSB at 2^-32
      base = (64'd48 << W1A8_POST_SHIFT) / (64'(isqrt(c.k * c.k * c.cin)) * 110 * 4096);
    else
      // Conv1 raw has 19 fractional bits and spans roughly +-2.0
      base = (64'd48 << C1_POST_SHIFT) / (64'd1 << 20);
    return DIV_W'((base * (64'd768 + 64'(r[25:16] % 512))) >> 10);
  endfunction

  // post-process bias of output channel o (QB_FRAC fractional bits, ~ -16..+48 LSB)
  function automatic logic signed [QB_W-1:0] gen_qbias(int unsigned layer, int unsigned o);
    logic [31:0] r;
    r = prand(key(layer, RK_QPAR) + 1000, o);
    return QB_W'(int'(r[13:0]) - 4096);
  endfunction

  // standard-conv weight of (output o, term j)
  function automatic logic signed [STDW_W-1:0] gen_stdw(int unsigned layer, int unsigned o, int unsigned j);
    logic [31:0] r;
    r = prand(key(layer, RK_STDW), o * 4096 + j);
    // +-1.0 in Q5.11 (Conv1), +-1/16 in Q1.15 (Conv11)
    return STDW_W'(int'(r[15:4]) - 2048);
  endfunction

  // standard-conv bias of output o
  function automatic logic signed [STDB_W-1:0] gen_stdb(int unsigned layer, int unsigned o);
    logic [31:0] r;
    r = prand(key(layer, RK_STDB), o);
    return STDB_W'(int'(r[14:2]) - 4096);                   // +-0.25 Q2.14 / +-1.0 Q4.12
  endfunction

  // One ROM word. The word layouts are the ones the RTL reads:
  //  RK_SIGN: bit j = sign of term j of output addr (j = k*cin + i)
  //  RK_MUL : Mul_prev of input channel addr
  //  RK_QPAR: {Div_current, bias} of output channel addr
  //  RK_STDW: field (p*terms + j) = weight of output addr*pe_num+p, term j
  //  RK_STDB: field p = bias of output addr*pe_num+p
  function automatic logic [MAX_ROM_W-1:0] rom_word(rom_kind_e kind, int unsigned layer,
                                                    int unsigned addr, int unsigned width,
                                                    int unsigned pe_num);
    logic [MAX_ROM_W-1:0] w;
    int unsigned terms;
    w = '0;
    case (kind)
      RK_SIGN: for (int unsigned c = 0; c < (width + 31) / 32; c++)
                 w[c*32 +: 32] = gen_sign32(layer, addr, c);
      RK_MUL:  w[MUL_W-1:0] = gen_mul(layer, addr);
      RK_QPAR: w[DIV_W+QB_W-1:0] = {gen_div(layer, addr), gen_qbias(layer, addr)};
      RK_STDW: begin
        terms = width / (STDW_W * pe_num);
        for (int unsigned p = 0; p < pe_num; p++)
          for (int unsigned j = 0; j < terms; j++)
            w[(p*terms + j)*STDW_W +: STDW_W] = gen_stdw(layer, addr*pe_num + p, j);
      end
      RK_STDB:
        for (int unsigned p = 0; p < pe_num; p++)
          w[p*STDB_W +: STDB_W] = gen_stdb(layer, addr*pe_num + p);
      default: w = '0;
    endcase
    return w;
  endfunction

endpackage
