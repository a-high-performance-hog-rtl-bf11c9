// tb_hog_extractor: test of the HOG pipeline from grayscale pixels to blocks.
//
// Two 32x32 grayscale frames (noise, then a smooth ramp with a bright square)
// are streamed with random gaps in the valid strobe. Each cell hog must be
// within 8 per bin of the real-valued reference (each pixel vote may be
// truncated differently by one), and each normalised feature within 0.02.
// Counts of cells and blocks per frame are checked.
module tb_hog_extractor;
  import hog_pkg::*;
  import hog_ref_pkg::*;

  localparam int W = 32, H = 32, FRAMES = 2;
  localparam int NC = (W / 8) * (H / 8), NB = NC / 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  gray_t in_pix = '0;
  logic cell_valid, cell_sof, blk_valid, blk_sof;
  cell_t cell_hog;
  feat_t feat;

  int checks = 0, failures = 0;
  int n_cell = 0, n_blk = 0, frame_cells = 0, frame_blks = 0;
  hog_ref m;

  hog_extractor #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && cell_valid) begin
      for (int k = 0; k < 9; k++) begin
        real d;
        d = real'(cell_hog[k]) - m.chist[n_cell * 9 + k];
        checks++;
        if (d > 8.0 || d < -8.0) begin
          failures++;
          $display("cell %0d bin %0d: got %0d exp %f", n_cell, k, cell_hog[k], m.chist[n_cell * 9 + k]);
        end
      end
      checks++;
      if (cell_sof != (n_cell == 0)) begin
        failures++;
        $display("cell %0d: cell_sof %0d", n_cell, cell_sof);
      end
      n_cell++;
    end
    if (rst_n && blk_valid) begin
      for (int i = 0; i < 36; i++) begin
        real d;
        d = f32(feat[i]) - m.feat[n_blk * 36 + i];
        checks++;
        if (d > 0.02 || d < -0.02) begin
          failures++;
          $display("block %0d feature %0d: got %f exp %f", n_blk, i, f32(feat[i]), m.feat[n_blk * 36 + i]);
        end
      end
      n_blk++;
    end
  end

  initial begin
    m = new(W, H);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          if (f == 0) m.gray[y * W + x] = $urandom_range(0, 255);
          else m.gray[y * W + x] = (x * 4 + y * 2) % 156 + ((x > 9 && x < 22 && y > 5 && y < 20) ? 0 : 100);
      m.features();
      n_cell = 0;
      n_blk = 0;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          in_valid = 0;
          repeat ($urandom_range(0, 1)) @(negedge clk);
          in_valid = 1;
          in_sof   = (x == 0 && y == 0);
          in_pix   = gray_t'(m.gray[y * W + x]);
        end
      @(negedge clk);
      in_valid = 0;
      in_sof   = 0;
      repeat (W + 150) @(negedge clk);
      checks++;
      if (n_cell != NC || n_blk != NB) begin
        failures++;
        $display("frame %0d: %0d cells %0d blocks, expected %0d and %0d", f, n_cell, n_blk, NC, NB);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
