// tb_aggregate: self-checking test of the cell histogram aggregation.
//
// Two frames of 32x16 pixels (4x2 cells) with random 9-bit votes in all nine
// bins are streamed, the second with gaps in the valid strobe. Each cell hog
// is compared with the bin-wise sum of its 64 pixels' votes; cells must come
// out in raster order, with cell_sof on cell (0,0), two cycles after the vote
// of the cell's last pixel.
module tb_aggregate;
  import hog_pkg::*;

  localparam int W = 32, H = 16, FRAMES = 2, LAT = 2;
  localparam int NCX = W / 8, NCY = H / 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  votes_t votes = '0;
  logic cell_hog_valid, cell_sof;
  cell_t cell_hog;

  int checks = 0, failures = 0;
  int hist [FRAMES][NCY][NCX][9];
  int last_pix_cyc [FRAMES][NCY][NCX];
  int n_cells = 0, cyc = 0;

  aggregate #(.IMG_W(W), .IMG_H(H)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && cell_hog_valid) begin
      int f, c, cx, cy;
      f  = n_cells / (NCX * NCY);
      c  = n_cells % (NCX * NCY);
      cx = c % NCX;
      cy = c / NCX;
      for (int k = 0; k < 9; k++) begin
        checks++;
        if (int'(cell_hog[k]) != hist[f][cy][cx][k]) begin
          failures++;
          $display("f%0d cell (%0d,%0d) bin %0d: got %0d exp %0d", f, cx, cy, k,
                   cell_hog[k], hist[f][cy][cx][k]);
        end
      end
      checks++;
      if (cell_sof != (c == 0) || cyc - last_pix_cyc[f][cy][cx] != LAT) begin
        failures++;
        $display("cell (%0d,%0d): sof %0d latency %0d", cx, cy, cell_sof, cyc - last_pix_cyc[f][cy][cx]);
      end
      n_cells++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          if (f == 1) begin
            in_valid = 0;
            repeat ($urandom_range(0, 1)) @(negedge clk);
          end
          in_valid = 1;
          in_sof   = (x == 0 && y == 0);
          for (int k = 0; k < 9; k++) begin
            int v;
            v = $urandom_range(0, 511);
            votes[k] = vote_t'(v);
            if (y % 8 == 0 && x % 8 == 0) hist[f][y/8][x/8][k] = v;
            else hist[f][y/8][x/8][k] += v;
          end
          last_pix_cyc[f][y/8][x/8] = cyc;
        end
      @(negedge clk);
      in_valid = 0;
      in_sof   = 0;
      repeat (4) @(negedge clk);
    end
    checks++;
    if (n_cells != FRAMES * NCX * NCY) begin
      failures++;
      $display("%0d cells, expected %0d", n_cells, FRAMES * NCX * NCY);
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
