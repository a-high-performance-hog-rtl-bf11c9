// aggregate: builds 8x8-pixel cell histograms from per-pixel votes.
//
// A first bin-wise adder sums the votes of the 8 consecutive pixels of one
// cell row into a partial cell hog (9 votes x 15 bits = 135 bits). A line
// buffer holds one partial hog per cell column (IMG_W/8 = 80 entries,
// ps_0..ps_79). When a partial hog completes, a second bin-wise adder adds it
// to the buffered entry of its cell column and writes the sum back; on the 8th
// pixel row of the cell row the sum is the finished cell hog and
// cell_hog_valid is raised. On the first pixel row the buffered value is
// ignored, so no clearing pass is needed.
//
// Interface: in_valid/in_sof/votes (one pixel per strobe, raster order);
// cell_hog_valid/cell_sof/cell_hog. Cells leave in raster order of cells,
// one every 8 pixels during the last pixel row of each cell row; cell_sof
// marks cell (0,0).
// Timing: a cell hog leaves 2 cycles after the vote of its last pixel.
//
// Paper: the two bin-wise adders, the 80-entry partial hog line buffer, the
// widths and the cell_hog_valid rule. The figure draws the buffer as a
// circular shift register; here it is an addressed memory with the same
// contents, so it maps to block RAM.
module aggregate
  import hog_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_sof,
  input  votes_t votes,
  output logic   cell_hog_valid,
  output logic   cell_sof,
  output cell_t  cell_hog
);

  localparam int NCX = IMG_W / CELL;
  localparam int XW  = $clog2(IMG_W);
  localparam int CXW = $clog2(NCX);

  logic [XW-1:0] x_cnt, px;
  logic [15:0]   y_cnt, py;
  cell_t         acc, acc_n;

  // pixel position of the incoming vote
  assign px = in_sof ? '0 : x_cnt;
  assign py = in_sof ? '0 : y_cnt;

  // bin-wise adder 1: 8 pixels of a cell row
  always_comb begin
    for (int k = 0; k < NBINS; k++)
      acc_n[k] = ((px[2:0] == 3'd0) ? cbin_t'(0) : acc[k]) + cbin_t'(votes[k]);
  end

  logic           ps_valid;
  logic           ps_first;   // partial hog of cell (0,0)
  cell_t          partial_sum;
  logic [CXW-1:0] ps_cx;
  logic [2:0]     ps_ry;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_cnt       <= '0;
      y_cnt       <= '0;
      acc         <= '0;
      ps_valid    <= 1'b0;
      ps_first    <= 1'b0;
      partial_sum <= '0;
      ps_cx       <= '0;
      ps_ry       <= '0;
    end else begin
      ps_valid <= 1'b0;
      if (in_valid) begin
        acc <= acc_n;
        if (px[2:0] == 3'd7) begin
          ps_valid    <= 1'b1;
          partial_sum <= acc_n;
          ps_cx       <= CXW'(px >> 3);
          ps_ry       <= py[2:0];
          ps_first    <= (px == XW'(7)) && (py == 16'd7);
        end
        if (px == XW'(IMG_W - 1)) begin
          x_cnt <= '0;
          y_cnt <= (py == 16'(IMG_H - 1)) ? '0 : py + 16'd1;
        end else begin
          x_cnt <= px + 1'b1;
          y_cnt <= py;
        end
      end
    end
  end

  // line buffer of partial cell hogs and bin-wise adder 2
  cell_t line_buf [NCX];
  cell_t prev, sum;
  assign prev = (ps_ry == 3'd0) ? cell_t'(0) : line_buf[ps_cx];
  always_comb
    for (int k = 0; k < NBINS; k++) sum[k] = prev[k] + partial_sum[k];

  always_ff @(posedge clk)
    if (ps_valid) line_buf[ps_cx] <= sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cell_hog_valid <= 1'b0;
      cell_sof       <= 1'b0;
      cell_hog       <= '0;
    end else begin
      cell_hog_valid <= ps_valid && (ps_ry == 3'd7);
      if (ps_valid && ps_ry == 3'd7) begin
        cell_hog <= sum;
        cell_sof <= ps_first;
      end
    end
  end

endmodule
