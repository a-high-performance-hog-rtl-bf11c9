// tb_deltaxy: self-checking test of the line buffers and Gx/Gy.
//
// Two random 8x6 grayscale frames are streamed, the second with gaps in the
// valid strobe. Every gradient is compared with Gx = I(x-1,y) - I(x+1,y),
// Gy = I(x,y-1) - I(x,y+1) (zero on the border), and the frame's last row
// must be flushed out within IMG_W+2 cycles after its last pixel.
module tb_deltaxy;
  import hog_pkg::*;

  localparam int W = 8, H = 6, FRAMES = 2, LAG = W + 1;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  gray_t in_pix = '0;
  logic out_valid, out_sof;
  grad_t gx, gy;

  int checks = 0, failures = 0;
  int img [FRAMES][H][W];
  int n_out = 0, cyc = 0, last_in = 0, last_out = 0;

  deltaxy #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int f, p, x, y, ex, ey;
      f = n_out / (W * H);
      p = n_out % (W * H);
      x = p % W;
      y = p / W;
      if (x == 0 || y == 0 || x == W - 1 || y == H - 1) begin
        ex = 0; ey = 0;
      end else begin
        ex = img[f][y][x-1] - img[f][y][x+1];
        ey = img[f][y-1][x] - img[f][y+1][x];
      end
      checks++;
      if (int'(gx) != ex || int'(gy) != ey || out_sof != (p == 0)) begin
        failures++;
        $display("mismatch f%0d (%0d,%0d): got %0d,%0d exp %0d,%0d", f, x, y, gx, gy, ex, ey);
      end
      n_out++;
      last_out = cyc;
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[f][y][x] = $urandom_range(0, 255);
    // a frame of extremes: largest positive and negative differences
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) img[0][y][x] = ((x + y) % 2) ? 255 : 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          if (f == 1) begin
            in_valid = 0;
            repeat ($urandom_range(0, 2)) @(negedge clk);
          end
          in_valid = 1;
          in_sof   = (x == 0 && y == 0);
          in_pix   = gray_t'(img[f][y][x]);
        end
      @(negedge clk);
      last_in = cyc;
      in_valid = 0;
      in_sof   = 0;
      repeat (LAG + 4) @(negedge clk);
      checks++;
      if (n_out != (f + 1) * W * H || last_out - last_in > LAG + 1) begin
        failures++;
        $display("frame %0d: %0d outputs, flushed %0d cycles after last input",
                 f, n_out, last_out - last_in);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
