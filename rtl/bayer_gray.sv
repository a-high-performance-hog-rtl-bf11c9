// bayer_gray: Bayer-pattern filter producing one grayscale pixel per raw pixel.
//
// Function: the camera delivers 12-bit raw pixels of a Bayer colour mosaic in
// raster order. For every raw pixel (x,y) the filter takes the 2x2 window
// (x-1..x, y-1..y), which always holds one red, one blue and two green
// samples, forms R, G = (G1+G2)/2 and B, and converts them to luma with the
// integer BT.601 weights Y = (77 R + 150 G + 29 B) / 256. The 8 most
// significant bits of the 12-bit luma are the grayscale pixel. On the first
// row and column the window is clamped to the current row / column.
//
// A single line buffer of IMG_W raw pixels supplies the row above. The filter
// also counts the pixel coordinate and passes it on with the pixel.
//
// Interface: raw_valid/raw_sof/raw_pixel in; gray_valid/gray_sof/gray_pixel
// and gray_x/gray_y out. raw_sof marks pixel (0,0) of a frame.
// Timing: one cycle latency, one pixel per clock.
//
// The existence of the filter, its input (12-bit raw) and output (8-bit gray)
// follow the paper. The 2x2 demosaic, the luma weights, the clamping at the
// border and the colour order (PATTERN) are this design's choices.
module bayer_gray
  import hog_pkg::*;
#(
  parameter int unsigned IMG_W   = 640,
  parameter int unsigned IMG_H   = 480,
  // 2-bit colour codes (0=R 1=G 2=B) of pixels (1,1),(0,1),(1,0),(0,0), MSB first
  parameter logic [7:0]  PATTERN = {2'd1, 2'd2, 2'd0, 2'd1}  // G R / B G
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        raw_valid,
  input  logic        raw_sof,
  input  raw_t        raw_pixel,
  output logic        gray_valid,
  output logic        gray_sof,
  output gray_t       gray_pixel,
  output logic [15:0] gray_x,
  output logic [15:0] gray_y
);

  localparam int XW = $clog2(IMG_W);

  raw_t          line_q [IMG_W];   // previous row
  logic [XW-1:0] x_cnt;
  logic [15:0]   y_cnt;
  raw_t          left_q, upleft_q;  // (x-1,y) and (x-1,y-1)

  logic [XW-1:0] cx;
  logic [15:0]   cy;
  raw_t          up, a, b, c, d;
  logic [13:0]   r_s, g_s, b_s;
  logic [21:0]   luma;

  function automatic logic [1:0] colour(input logic px, input logic py);
    return PATTERN[{py, px, 1'b0} +: 2];
  endfunction

  always_comb begin
    cx = raw_sof ? '0 : x_cnt;
    cy = raw_sof ? '0 : y_cnt;
    up = line_q[cx];
    // window: a=(x-1,y-1) b=(x,y-1) c=(x-1,y) d=(x,y)
    d = raw_pixel;
    c = (cx == 0) ? d : left_q;
    b = (cy == 0) ? d : up;
    a = (cy == 0) ? c : ((cx == 0) ? b : upleft_q);
    r_s = '0; g_s = '0; b_s = '0;
    for (int k = 0; k < 4; k++) begin
      logic        px, py;
      raw_t        v;
      px = cx[0] ^ ~k[0];
      py = cy[0] ^ ~k[1];
      unique case (k)
        0: v = a;
        1: v = b;
        2: v = c;
        default: v = d;
      endcase
      unique case (colour(px, py))
        2'd0:    r_s = r_s + 14'(v);
        2'd2:    b_s = b_s + 14'(v);
        default: g_s = g_s + 14'(v);
      endcase
    end
    // a window holds exactly one R, one B and two G
    luma = 22'(77 * r_s) + 22'(75 * g_s) + 22'(29 * b_s);
  end

  always_ff @(posedge clk) begin
    if (raw_valid) begin
      line_q[cx] <= raw_pixel;
      left_q     <= raw_pixel;
      upleft_q   <= up;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_cnt      <= '0;
      y_cnt      <= '0;
      gray_valid <= 1'b0;
      gray_sof   <= 1'b0;
      gray_pixel <= '0;
      gray_x     <= '0;
      gray_y     <= '0;
    end else begin
      gray_valid <= raw_valid;
      if (raw_valid) begin
        gray_sof   <= raw_sof;
        gray_pixel <= luma[19:12];
        gray_x     <= 16'(cx);
        gray_y     <= cy;
        if (cx == XW'(IMG_W - 1)) begin
          x_cnt <= '0;
          y_cnt <= (cy == 16'(IMG_H - 1)) ? '0 : cy + 16'd1;
        end else begin
          x_cnt <= cx + 1'b1;
          y_cnt <= cy;
        end
      end
    end
  end

endmodule
