// hog_system_tester: stimulus, memory model and checker for the end-to-end
// testbenches of hog_system.
//
// It plays the camera (raw Bayer frames, one pixel per clock, W/4 idle cycles
// of line blanking and a frame gap long enough for the pipeline to drain) and
// the HPS memory behind both Avalon-MM write masters, with random
// waitrequest. Each frame is checked against hog_ref_pkg:
//   * every grayscale byte at PIX_BASE + y*W + x must match exactly;
//   * every feature at FEAT_BASE + block*144 + 4*i must be within 0.02 of
//     the real-valued reference (the hardware truncates each vote to an
//     integer and computes in fixed point).
// Frame 0 is random noise, frame 1 a tilted stripe pattern with noise. If
// OVF_FRAME is set, a last frame runs with the pixel bus stalled throughout,
// so the pixel FIFO must overflow while the features stay correct.
// Mechanisms counted, each of which must occur: stalls on both buses, the
// line-buffer flush after a frame, a vote wrapping from bin 8 to bin 0,
// line blanking and (with OVF_FRAME) the pixel FIFO overflow. The last block
// of a frame must leave within W+120 cycles of the frame's last pixel: the
// pipeline keeps up with one pixel per clock and buffers no frame.
module hog_system_tester
  import hog_pkg::*;
  import hog_ref_pkg::*;
#(
  parameter int unsigned W         = 640,
  parameter int unsigned H         = 480,
  parameter int unsigned FRAMES    = 1,
  parameter bit          OVF_FRAME = 1'b0,
  parameter logic [31:0] PIX_BASE  = 32'h3000_0000,
  parameter logic [31:0] FEAT_BASE = 32'h3800_0000
) (
  output logic         clk,
  output logic         rst_n,
  output logic         raw_valid,
  output logic         raw_sof,
  output raw_t         raw_pixel,
  input  logic [31:0]  feat_avm_address,
  input  logic         feat_avm_write,
  input  logic [127:0] feat_avm_writedata,
  output logic         feat_avm_waitrequest,
  input  logic [31:0]  pix_avm_address,
  input  logic         pix_avm_write,
  input  logic [7:0]   pix_avm_writedata,
  output logic         pix_avm_waitrequest,
  input  logic         blk_valid,
  input  logic [31:0]  pix_overflow_cnt,
  input  logic [31:0]  feat_drop_cnt,
  input  logic [31:0]  pix_stall_cycles,
  input  logic [31:0]  feat_stall_cycles,
  input  logic         flushing,
  input  logic         vote_wrap
);

  localparam int NB = (W / 16) * (H / 16);

  int checks = 0, failures = 0;
  byte unsigned pmem [int];
  logic [31:0]  fmem [int];
  int pix_stall_mode = 1;   // 0 none, 1 random, 2 always
  int n_feat_stall = 0, n_pix_stall = 0, n_flush = 0, n_wrap = 0, n_blank = 0, n_blk = 0;
  int cyc = 0, last_blk_cyc = 0;

  initial clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n) begin
      if (pix_avm_write && !pix_avm_waitrequest) pmem[int'(pix_avm_address)] = pix_avm_writedata;
      if (feat_avm_write && !feat_avm_waitrequest)
        for (int i = 0; i < 4; i++) fmem[int'(feat_avm_address) + 4 * i] = feat_avm_writedata[32*i +: 32];
      if (pix_avm_write && pix_avm_waitrequest) n_pix_stall++;
      if (feat_avm_write && feat_avm_waitrequest) n_feat_stall++;
      if (flushing) n_flush++;
      if (vote_wrap) n_wrap++;
      if (blk_valid) begin
        n_blk++;
        last_blk_cyc = cyc;
      end
    end
  end

  always @(negedge clk) begin
    feat_avm_waitrequest <= ($urandom_range(0, 2) == 0);
    pix_avm_waitrequest  <= (pix_stall_mode == 2) ? 1'b1 :
                            (pix_stall_mode == 1 ? ($urandom_range(0, 7) == 0) : 1'b0);
  end

  task automatic run_frame(int f, hog_ref m, bit overflow);
    int blk0, last_pix_cyc;
    real err, max_err, sum_err;
    for (int y = 0; y < int'(H); y++)
      for (int x = 0; x < int'(W); x++)
        if (f % 2 == 0) m.raw[y * W + x] = $urandom_range(0, 4095);
        else m.raw[y * W + x] = (((x + 2 * y) / 5) % 2) * 3000 + $urandom_range(0, 600);
    m.compute();
    pmem.delete();
    fmem.delete();
    blk0 = n_blk;
    pix_stall_mode = overflow ? 2 : 1;
    for (int y = 0; y < int'(H); y++) begin
      for (int x = 0; x < int'(W); x++) begin
        @(negedge clk);
        raw_valid = 1;
        raw_sof   = (x == 0 && y == 0);
        raw_pixel = raw_t'(m.raw[y * W + x]);
      end
      @(negedge clk);
      last_pix_cyc = cyc;
      raw_valid = 0;
      raw_sof   = 0;
      n_blank++;
      repeat (W / 4 - 1) @(negedge clk);
    end
    repeat (W + 400) @(negedge clk);
    pix_stall_mode = 1;
    repeat (W / 2 + 2200) @(negedge clk);   // the pixel FIFO drains
    // blocks
    checks++;
    if (n_blk - blk0 != NB) begin
      failures++;
      $display("frame %0d: %0d blocks, expected %0d", f, n_blk - blk0, NB);
    end
    // streaming: the last block leaves within the pipeline depth of the last
    // pixel (line-buffer lag W+1, CORDIC and vote stages, normaliser), so a
    // frame takes W*H pixel clocks plus blanking and no frame is buffered
    checks++;
    if (last_blk_cyc - last_pix_cyc > int'(W) + 120) failures++;
    $display("frame %0d: last block %0d cycles after the last pixel", f, last_blk_cyc - last_pix_cyc);
    max_err = 0.0;
    sum_err = 0.0;
    for (int i = 0; i < NB * 36; i++) begin
      int a;
      a = int'(FEAT_BASE) + (i / 36) * 144 + 4 * (i % 36);
      checks++;
      if (!fmem.exists(a)) begin
        failures++;
        $display("frame %0d: feature %0d not written", f, i);
      end else begin
        err = f32(fmem[a]) - m.feat[i];
        if (err < 0) err = -err;
        sum_err += err;
        if (err > max_err) max_err = err;
        if (err > 0.02) begin
          failures++;
          $display("frame %0d block %0d feature %0d: got %f exp %f", f, i / 36, i % 36,
                   f32(fmem[a]), m.feat[i]);
        end
      end
    end
    $display("frame %0d: %0d blocks, feature error mean %f max %f", f, NB, sum_err / (NB * 36), max_err);
    // pixels
    if (!overflow)
      for (int i = 0; i < int'(W * H); i++) begin
        int a;
        a = int'(PIX_BASE) + i;
        checks++;
        if (!pmem.exists(a) || int'(pmem[a]) != m.gray[i]) begin
          failures++;
          if (failures < 20) $display("frame %0d: pixel %0d wrong", f, i);
        end
      end
  endtask

  initial begin
    hog_ref m;
    m = new(W, H);
    rst_n = 0;
    raw_valid = 0;
    raw_sof = 0;
    raw_pixel = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < int'(FRAMES); f++) run_frame(f, m, 1'b0);
    checks++;
    if (pix_overflow_cnt != 0 || feat_drop_cnt != 0) begin
      failures++;
      $display("data lost in normal frames: pixels %0d blocks %0d", pix_overflow_cnt, feat_drop_cnt);
    end
    if (OVF_FRAME) begin
      run_frame(int'(FRAMES), m, 1'b1);
      checks++;
      if (pix_overflow_cnt == 0) begin
        failures++;
        $display("pixel FIFO never overflowed");
      end
    end
    $display("mechanisms: feature-bus stalls %0d, pixel-bus stalls %0d, flush cycles %0d, vote wraps %0d, blanked lines %0d, pixel overflows %0d",
             n_feat_stall, n_pix_stall, n_flush, n_wrap, n_blank, pix_overflow_cnt);
    checks++;
    if (n_feat_stall == 0 || n_pix_stall == 0 || n_flush == 0 || n_wrap == 0 || n_blank == 0 ||
        feat_stall_cycles != 32'(n_feat_stall) || pix_stall_cycles != 32'(n_pix_stall)) begin
      failures++;
      $display("a mechanism never occurred or its counter is wrong");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
