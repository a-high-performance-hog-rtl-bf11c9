// tb_bayer_gray: self-checking test of the Bayer filter on two small frames.
//
// Random 12-bit raw frames (8x6) are streamed one pixel per clock, with a gap
// between frames. The expected gray value of every pixel is computed here from
// the 2x2 window rule (clamped at the first row and column), a G R / B G
// mosaic and the BT.601 integer weights; the coordinates and the one-cycle
// latency are checked as well.
module tb_bayer_gray;
  import hog_pkg::*;

  localparam int W = 8, H = 6, FRAMES = 2;

  logic clk = 0, rst_n = 0;
  logic raw_valid = 0, raw_sof = 0;
  raw_t raw_pixel = '0;
  logic gray_valid, gray_sof;
  gray_t gray_pixel;
  logic [15:0] gray_x, gray_y;

  int checks = 0, failures = 0;
  int img [FRAMES][H][W];
  int exp_q[$];
  int cyc = 0, last_in_cyc = -10;

  bayer_gray #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // colour of (x,y): 0=R 1=G 2=B for G R / B G
  function automatic int colour(int x, int y);
    if (y % 2 == 0) return (x % 2 == 0) ? 1 : 0;
    return (x % 2 == 0) ? 2 : 1;
  endfunction

  function automatic int ref_gray(int f, int x, int y);
    int xs[2], ys[2], r = 0, g = 0, b = 0;
    xs = '{x - 1, x};
    ys = '{y - 1, y};
    for (int j = 0; j < 2; j++)
      for (int i = 0; i < 2; i++) begin
        int vx = (xs[i] < 0) ? 0 : xs[i];
        int vy = (ys[j] < 0) ? 0 : ys[j];
        int v = img[f][vy][vx];
        case (colour(xs[i] < 0 ? x + 1 : xs[i], ys[j] < 0 ? y + 1 : ys[j]))
          0: r += v;
          2: b += v;
          default: g += v;
        endcase
      end
    return ((77 * r + 150 * g / 2 + 29 * b) >> 8) >> 4;
  endfunction

  // output checker
  int n_out = 0;
  always @(posedge clk) begin
    if (rst_n && gray_valid) begin
      int f, p, x, y;
      f = n_out / (W * H);
      p = n_out % (W * H);
      x = p % W;
      y = p / W;
      checks++;
      if (gray_pixel != 8'(ref_gray(f, x, y)) || gray_x != 16'(x) || gray_y != 16'(y) ||
          gray_sof != (p == 0)) begin
        failures++;
        $display("mismatch f%0d (%0d,%0d): got %0d @(%0d,%0d) exp %0d", f, x, y,
                 gray_pixel, gray_x, gray_y, ref_gray(f, x, y));
      end
      n_out++;
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[f][y][x] = $urandom_range(0, 4095);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          raw_valid = 1;
          raw_sof   = (x == 0 && y == 0);
          raw_pixel = raw_t'(img[f][y][x]);
        end
      @(negedge clk);
      raw_valid = 0;
      raw_sof   = 0;
      repeat (5) @(negedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != FRAMES * W * H) begin
      failures++;
      $display("expected %0d pixels, got %0d", FRAMES * W * H, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency: the output follows its input by exactly one cycle
  logic in_d;
  always @(posedge clk) begin
    in_d <= raw_valid && rst_n;
    if (rst_n) begin
      checks++;
      if (gray_valid != in_d) begin
        failures++;
        $display("latency mismatch at cycle %0d", cyc);
      end
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
