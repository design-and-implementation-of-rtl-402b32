// tb_top_body.svh: shared body of the end-to-end testbenches of yolo3_tiny_top.
// The including module defines IMG_H, IMG_W, NFRAMES, WATCHDOG and instantiates
// the DUT (u_dut) on the signals declared here. The body
//  - streams NFRAMES generated RGB images with random input gaps and an
//    end-of-frame marker (frame 2 carries one misplaced marker as well),
//  - takes the output with random backpressure,
//  - compares every 32-bit output word with tb_ref_pkg::ref_net,
//  - counts how often each stream mechanism happened and fails if one never did,
//  - checks the cycles per frame against the paper's 23.79 M-cycle frame
//    (scaled by pixel count for a smaller image).
import bnn_pkg::*;
import tb_ref_pkg::*;

localparam int NPIX = IMG_H * IMG_W;
localparam int NOUT = (IMG_H / 32) * (IMG_W / 32) * 75;

logic        clk = 1'b0;
logic        rst_n = 1'b0;
logic        in_valid, in_ready, in_last;
logic [23:0] in_rgb;
logic        out_valid, out_ready, out_last;
logic signed [31:0] out_data;
logic        frame_err;

int checks = 0, failures = 0;
int n_in_stall = 0, n_in_gap = 0, n_out_stall = 0, n_frame_err = 0, n_last = 0;
int n_pool1 = 0, n_pad = 0, n_mulload = 0;
longint cyc = 0;
longint frame_start [8];
longint frame_end [8];
fmap_t img [8];
fmap_t exp_out [8];

always #5 clk = ~clk;
always_ff @(posedge clk) cyc <= cyc + 1;

// mechanism counters
always_ff @(posedge clk) if (rst_n) begin
  if (in_valid && !in_ready) n_in_stall++;
  if (!in_valid && in_ready) n_in_gap++;
  if (out_valid && !out_ready) n_out_stall++;
  if (frame_err) n_frame_err++;
  if (u_dut.u_conv1.g_pool.u_pool.out_valid && u_dut.u_conv1.g_pool.u_pool.out_ready) n_pool1++;
  if (u_dut.u_conv1.g_k3.u_pad.out_valid && u_dut.u_conv1.g_k3.u_pad.out_ready &&
      !u_dut.u_conv1.g_k3.u_pad.in_ready) n_pad++;
  if (u_dut.u_head.state == 3'd0 && u_dut.u_head.lcnt == 7'd1) n_mulload++;
end

// driver: inputs change on the falling edge; `in_acc` records whether the
// beat was taken on the rising edge in between.
logic in_acc = 1'b0;
always_ff @(posedge clk) in_acc <= in_valid && in_ready;

initial begin
  in_valid = 1'b0;
  in_rgb   = '0;
  in_last  = 1'b0;
  for (int f = 0; f < NFRAMES; f++) begin
    img[f] = gen_image(IMG_H, IMG_W, f);
    exp_out[f] = ref_net(IMG_H, IMG_W, img[f]);
  end
  $display("reference model ready");
  repeat (5) @(negedge clk);
  rst_n = 1'b1;
  repeat (3) @(negedge clk);
  for (int f = 0; f < NFRAMES; f++) begin
    frame_start[f] = cyc;
    for (int p = 0; p < NPIX; p++) begin
      while (($urandom % 16) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      in_valid = 1'b1;
      in_rgb   = {8'(img[f][p*3 + 0]), 8'(img[f][p*3 + 1]), 8'(img[f][p*3 + 2])};
      in_last  = (p == NPIX - 1) || (f == 1 && p == 5);
      do @(negedge clk); while (!in_acc);
    end
    in_valid = 1'b0;
    in_last  = 1'b0;
  end
end

// monitor: output words are checked on the rising edge that takes them
int of = 0, ok = 0;
always_ff @(posedge clk) begin
  if (rst_n && out_valid && out_ready && of < NFRAMES) begin
    checks++;
    if (out_data != exp_out[of][ok]) begin
      failures++;
      if (failures < 10) $display("MISMATCH frame %0d word %0d: got %0d expected %0d", of, ok, out_data, exp_out[of][ok]);
    end
    checks++;
    if (out_last != (ok == NOUT - 1)) begin
      failures++;
      $display("out_last wrong at frame %0d word %0d", of, ok);
    end
    if (out_last) n_last++;
    if (ok == NOUT - 1) begin
      frame_end[of] = cyc;
      $display("frame %0d done: %0d cycles from its first input", of, frame_end[of] - frame_start[of]);
      ok <= 0;
      of <= of + 1;
    end else begin
      ok <= ok + 1;
    end
  end
end

initial begin
  out_ready = 1'b0;
  wait (rst_n);
  while (of < NFRAMES) begin
    @(negedge clk);
    out_ready = ($urandom % 4) != 0;
  end
  // cycle budget: the paper's 23.79 M cycles per 320x320 frame
  checks++;
  if (real'(frame_end[0] - frame_start[0]) > 23.79e6 * real'(NPIX) / (320.0 * 320.0)) begin
    failures++;
    $display("frame took more cycles than the paper's budget");
  end
  $display("mechanisms: in_stall=%0d in_gap=%0d out_stall=%0d frame_err=%0d out_last=%0d pool1=%0d pad=%0d mul_load=%0d",
           n_in_stall, n_in_gap, n_out_stall, n_frame_err, n_last, n_pool1, n_pad, n_mulload);
  checks++; if (n_in_stall == 0) begin failures++; $display("no input backpressure seen"); end
  checks++; if (n_in_gap == 0) begin failures++; $display("no input gap seen"); end
  checks++; if (n_out_stall == 0) begin failures++; $display("no output backpressure seen"); end
  checks++; if (n_last != NFRAMES) begin failures++; $display("wrong number of out_last"); end
  checks++; if (n_pool1 != NFRAMES * NPIX / 4) begin failures++; $display("wrong Conv1 pool count"); end
  checks++; if (n_pad < NFRAMES * (2 * IMG_W + 2 * IMG_H + 4) || n_pad > NFRAMES * (2 * IMG_W + 2 * IMG_H + 4) + IMG_W + 3) begin failures++; $display("wrong Conv1 padding count %0d", n_pad); end
  checks++; if (n_mulload != 1) begin failures++; $display("Mul_prev load not seen once"); end
  if (NFRAMES > 1) begin
    checks++; if (n_frame_err != 1) begin failures++; $display("misplaced end-of-frame not flagged once"); end
  end
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

// watchdog
initial begin
  #(longint'(WATCHDOG) * 10);
  failures++;
  $display("watchdog expired at cycle %0d", cyc);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
