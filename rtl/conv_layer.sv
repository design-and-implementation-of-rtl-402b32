// conv_layer: one streaming convolution layer of the detector (Conv1..Conv10).
//
// Data path: [padding_adapter -> line_buffer_3x3] (3x3 layers only; a 1x1 layer
// takes each pixel as its window) -> window register -> PE -> post_process ->
// output vector register -> [maxpool_2x2] (pooled layers only). LAYER selects
// the row of bnn_pkg's layer table (channels, kernel, pooling, W1A8 or
// standard). Conv1 uses std_conv_pe (Q5.11 weights, Q2.14 bias, Q0.8 pixels);
// Conv2..Conv10 use w1a8_pe (1-bit signs, Mul_prev fused in the PE).
//
// Parameters live in param_rom instances, one word per output channel:
// weights (signs or 16-bit weights), {Div_current, bias} for post-processing,
// the standard-conv bias, and (W1A8) the CIN Mul_prev values. The ROMs have
// ROM_LAT cycles of read latency (1 = block RAM without output register).
//
// Controller (state machine):
//   LOAD  W1A8 layers only, once after reset: reads Mul_prev[0..CIN-1] from its
//         ROM into registers, latching each word ROM_LAT cycles after its
//         address was issued.
//   IDLE  accepts one window from the line buffer into the window register.
//   RUN   issues output-channel addresses 0..COUT-1, one per cycle. A shift
//         register of {valid, channel} tags follows each address: ROM_LAT
//         cycles later the ROM word is there and the PE is enabled; one cycle
//         later post_process is enabled; one cycle later the 8-bit result is
//         written into slot `channel` of the result vector.
//   DONE  moves the full COUT-channel result vector into the output register
//         as soon as it is free, then returns to IDLE.
// One window costs COUT + ROM_LAT + 4 cycles. Input and output are
// valid/ready streams of channel vectors in raster order; a full output
// register stalls the controller, which stalls the line buffer and the
// padding adapter, so backpressure reaches the layer's input.
// The paper gives the block sequence and that the state machine schedules
// address issue, data latch and compute start by the ROM read latency; the
// one-output-channel-per-cycle schedule is this design's choice.
module conv_layer
  import bnn_pkg::*;
#(
  parameter int unsigned LAYER   = 2,
  parameter int unsigned H       = 160,
  parameter int unsigned W       = 160,
  parameter int unsigned ROM_LAT = 1,
  localparam int unsigned CIN    = layer_cfg(LAYER).cin,
  localparam int unsigned COUT   = layer_cfg(LAYER).cout
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  logic [CIN-1:0][ACT_W-1:0]  in_data,
  output logic out_valid,
  input  logic out_ready,
  output logic [COUT-1:0][ACT_W-1:0] out_data
);
  localparam layer_cfg_t CFG = layer_cfg(LAYER);
  localparam int unsigned KK   = CFG.k * CFG.k;
  localparam bit          BIN  = CFG.binary;
  localparam bit          POOL = CFG.pool;
  localparam int unsigned NT   = KK * CIN;
  localparam int unsigned ACC_W = BIN ? W1A8_ACC_W : STD_ACC_W;
  localparam int unsigned SHIFT = BIN ? W1A8_POST_SHIFT : C1_POST_SHIFT;
  localparam int unsigned NCNT  = (CIN > COUT) ? CIN : COUT;
  localparam int CW  = $clog2(NCNT + 1);
  localparam int OAW = $clog2(COUT > 1 ? COUT : 2);
  localparam int IAW = $clog2(CIN > 1 ? CIN : 2);
  localparam int unsigned DL = ROM_LAT + 2;  // tag pipeline depth

  typedef logic [KK-1:0][CIN-1:0][ACT_W-1:0] win_t;
  typedef enum logic [1:0] {S_LOAD, S_IDLE, S_RUN, S_DONE} state_e;

  // ---------------------------------------------------------- window source
  logic win_valid, win_ready;
  win_t win_data;

  if (CFG.k == 3) begin : g_k3
    logic                         pad_valid, pad_ready;
    logic [CIN-1:0][ACT_W-1:0]    pad_data;
    padding_adapter #(.C(CIN), .H(H), .W(W), .PAD(1)) u_pad (
      .clk, .rst_n,
      .in_valid, .in_ready, .in_data,
      .out_valid(pad_valid), .out_ready(pad_ready), .out_data(pad_data));
    line_buffer_3x3 #(.C(CIN), .WP(W + 2), .HP(H + 2)) u_lb (
      .clk, .rst_n,
      .in_valid(pad_valid), .in_ready(pad_ready), .in_data(pad_data),
      .out_valid(win_valid), .out_ready(win_ready), .out_win(win_data));
  end else begin : g_k1
    assign win_valid = in_valid;
    assign in_ready  = win_ready;
    assign win_data  = in_data;
  end

  // ------------------------------------------------------------ controller
  state_e         state;
  logic [CW-1:0]  cnt;
  logic           issue;
  win_t           win_q;
  logic [DL-1:0]  tag_v;
  logic [CW-1:0]  tag_i [DL];
  logic [COUT-1:0][ACT_W-1:0] res;
  logic           conv_valid, conv_ready;
  logic [COUT-1:0][ACT_W-1:0] conv_data;
  logic           last_wr;

  assign win_ready = (state == S_IDLE);
  assign issue = ((state == S_RUN) && (cnt < CW'(COUT))) || ((state == S_LOAD) && (cnt < CW'(CIN)));
  assign last_wr = tag_v[DL-1] && (tag_i[DL-1] == CW'(COUT - 1)) && (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= BIN ? S_LOAD : S_IDLE;
      cnt   <= '0;
      tag_v <= '0;
      for (int i = 0; i < int'(DL); i++) tag_i[i] <= '0;
      conv_valid <= 1'b0;
    end else begin
      tag_v[0] <= issue;
      tag_i[0] <= cnt;
      for (int i = 1; i < int'(DL); i++) begin
        tag_v[i] <= tag_v[i-1];
        tag_i[i] <= tag_i[i-1];
      end
      if (issue) cnt <= cnt + 1'b1;
      if (conv_valid && conv_ready) conv_valid <= 1'b0;
      case (state)
        S_LOAD: if (cnt == CW'(CIN) && tag_v == '0) state <= S_IDLE;
        S_IDLE: if (win_valid) begin
                  cnt   <= '0;
                  state <= S_RUN;
                end
        S_RUN:  if (last_wr) state <= S_DONE;
        S_DONE: if (!conv_valid || conv_ready) begin
                  conv_valid <= 1'b1;
                  state      <= S_IDLE;
                end
        default: state <= S_IDLE;
      endcase
    end
  end

  // data registers (no reset needed: written before use)
  always_ff @(posedge clk) begin
    if (state == S_IDLE && win_valid) win_q <= win_data;
    if (state == S_DONE && (!conv_valid || conv_ready)) conv_data <= res;
  end

  // ---------------------------------------------------------- parameter ROMs
  logic [OAW-1:0]          oaddr;
  logic [DIV_W+QB_W-1:0]   qpar;
  logic [DIV_W+QB_W-1:0]   qpar_d;
  logic [ACC_W-1:0]        acc;
  logic [ACT_W-1:0]        q;

  assign oaddr = OAW'(cnt);

  param_rom #(.WIDTH(DIV_W + QB_W), .DEPTH(COUT), .LATENCY(ROM_LAT), .KIND(RK_QPAR),
              .LAYER(LAYER)) u_qrom (.clk, .addr(oaddr), .data(qpar));

  always_ff @(posedge clk) qpar_d <= qpar;

  if (BIN) begin : g_w1a8
    logic [NT-1:0]    sgn;
    logic [MUL_W-1:0] mword;
    logic [CIN-1:0][MUL_W-1:0] mul_q;
    param_rom #(.WIDTH(NT), .DEPTH(COUT), .LATENCY(ROM_LAT), .KIND(RK_SIGN),
                .LAYER(LAYER)) u_wrom (.clk, .addr(oaddr), .data(sgn));
    param_rom #(.WIDTH(MUL_W), .DEPTH(CIN), .LATENCY(ROM_LAT), .KIND(RK_MUL),
                .LAYER(LAYER)) u_mrom (.clk, .addr(IAW'(cnt)), .data(mword));
    always_ff @(posedge clk) begin
      if (state == S_LOAD && tag_v[ROM_LAT-1]) mul_q[tag_i[ROM_LAT-1][IAW-1:0]] <= mword;
    end
    w1a8_pe #(.CIN(CIN), .KK(KK), .ACC_W(ACC_W)) u_pe (
      .clk, .en(tag_v[ROM_LAT-1] && state == S_RUN), .win(win_q), .sgn, .mul(mul_q),
      .acc(acc));
  end else begin : g_std
    logic [NT-1:0][STDW_W-1:0] wts;
    logic [STDB_W-1:0]         bia;
    logic [NT-1:0][ACT_W-1:0]  xin;
    param_rom #(.WIDTH(NT * STDW_W), .DEPTH(COUT), .LATENCY(ROM_LAT), .KIND(RK_STDW),
                .LAYER(LAYER), .PE_NUM(1)) u_wrom (.clk, .addr(oaddr), .data(wts));
    param_rom #(.WIDTH(STDB_W), .DEPTH(COUT), .LATENCY(ROM_LAT), .KIND(RK_STDB),
                .LAYER(LAYER), .PE_NUM(1)) u_brom (.clk, .addr(oaddr), .data(bia));
    assign xin = win_q;
    std_conv_pe #(.PE_NUM(1), .NTERM(NT), .XW(ACT_W), .BIAS_SHIFT(C1_W_FRAC + PIX_FRAC - C1_B_FRAC),
                  .ACC_W(ACC_W)) u_pe (
      .clk, .en(tag_v[ROM_LAT-1] && state == S_RUN), .x(xin), .w(wts), .b(bia), .acc(acc));
  end

  post_process #(.ACC_W(ACC_W), .SHIFT(SHIFT)) u_post (
    .clk, .en(tag_v[ROM_LAT]), .acc($signed(acc)),
    .div(qpar_d[DIV_W+QB_W-1:QB_W]), .bias($signed(qpar_d[QB_W-1:0])), .q(q));

  always_ff @(posedge clk) begin
    if (tag_v[DL-1] && state == S_RUN) res[tag_i[DL-1][OAW-1:0]] <= q;
  end

  // ---------------------------------------------------------- optional pool
  if (POOL) begin : g_pool
    maxpool_2x2 #(.C(COUT), .H(H), .W(W)) u_pool (
      .clk, .rst_n,
      .in_valid(conv_valid), .in_ready(conv_ready), .in_data(conv_data),
      .out_valid, .out_ready, .out_data);
  end else begin : g_nopool
    assign out_valid  = conv_valid;
    assign conv_ready = out_ready;
    assign out_data   = conv_data;
  end

  // Handshake rule: an offered output beat stays valid until taken.
  logic hs_stall_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hs_stall_q <= 1'b0;
    end else begin
      if (hs_stall_q) a_hold: assert (out_valid)
        else $error("%m: output beat withdrawn before it was taken");
      hs_stall_q <= out_valid && !out_ready;
    end
  end
endmodule
