// tb_normalize: self-checking test of the block normaliser.
//
// Frames of 32x32 pixels (4x4 cells, 2x2 blocks) of random cell histograms
// are fed cell by cell in raster order; one block of the second frame is all
// zero (the EPS case) and one holds the largest cell values. Every output
// float is compared with v / sqrt(sum v^2 + EPS^2) computed in real
// arithmetic (absolute tolerance 2e-3). Blocks must come out in raster order
// of blocks, 80 cycles after the cell that completes them.
module tb_normalize;
  import hog_pkg::*;

  localparam int W = 32, H = 32, FRAMES = 3, LAT = 80, EPS = 1;
  localparam int NCX = W / 8, NCY = H / 8, NBX = NCX / 2, NBY = NCY / 2;

  logic clk = 0, rst_n = 0;
  logic cell_valid = 0, cell_sof = 0;
  cell_t cell_hog = '0;
  logic blk_valid, blk_sof;
  feat_t feat;

  int checks = 0, failures = 0;
  int cells [FRAMES][NCY][NCX][9];
  int done_cyc [FRAMES][NBY][NBX];
  int n_blk = 0, cyc = 0;

  normalize #(.IMG_W(W), .IMG_H(H), .EPS(EPS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // IEEE-754 single to real, decoded field by field
  function automatic real f32(logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    for (int i = 0; i < e; i++) m = m * 2.0;
    for (int i = 0; i > e; i--) m = m / 2.0;
    return b[31] ? -m : m;
  endfunction

  always @(posedge clk) begin
    if (rst_n && blk_valid) begin
      int f, b, bx, by, v[36];
      real s, e, d;
      f  = n_blk / (NBX * NBY);
      b  = n_blk % (NBX * NBY);
      bx = b % NBX;
      by = b / NBX;
      for (int c = 0; c < 4; c++)
        for (int k = 0; k < 9; k++)
          v[c*9+k] = cells[f][2*by + c/2][2*bx + c%2][k];
      s = EPS * EPS;
      foreach (v[i]) s += real'(v[i]) * real'(v[i]);
      for (int i = 0; i < 36; i++) begin
        e = real'(v[i]) / $sqrt(s);
        d = f32(feat[i]) - e;
        checks++;
        if (d > 2e-3 || d < -2e-3) begin
          failures++;
          $display("f%0d block (%0d,%0d) feature %0d: got %f exp %f", f, bx, by, i, f32(feat[i]), e);
        end
      end
      checks++;
      if (blk_sof != (b == 0) || cyc - done_cyc[f][by][bx] != LAT) begin
        failures++;
        $display("block (%0d,%0d): sof %0d latency %0d", bx, by, blk_sof, cyc - done_cyc[f][by][bx]);
      end
      n_blk++;
    end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int cy = 0; cy < NCY; cy++)
        for (int cx = 0; cx < NCX; cx++)
          for (int k = 0; k < 9; k++)
            cells[f][cy][cx][k] = (f == 0) ? $urandom_range(0, 23040) : $urandom_range(0, 300);
    for (int cy = 0; cy < 2; cy++)
      for (int cx = 0; cx < 2; cx++)
        for (int k = 0; k < 9; k++) begin
          cells[1][cy][cx][k] = 0;          // all-zero block
          cells[2][cy][cx][k] = 23040;      // largest block
        end
    cells[2][0][0][3] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int cy = 0; cy < NCY; cy++)
        for (int cx = 0; cx < NCX; cx++) begin
          @(negedge clk);
          cell_valid = 0;
          repeat ($urandom_range(0, 3)) @(negedge clk);
          cell_valid = 1;
          cell_sof   = (cx == 0 && cy == 0);
          for (int k = 0; k < 9; k++) cell_hog[k] = cbin_t'(cells[f][cy][cx][k]);
          done_cyc[f][cy/2][cx/2] = cyc;
        end
    @(negedge clk);
    cell_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (n_blk != FRAMES * NBX * NBY) begin
      failures++;
      $display("%0d blocks, expected %0d", n_blk, FRAMES * NBX * NBY);
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
