// deltaxy: pixel line buffers and luminance differences Gx, Gy.
//
// Two line buffers of IMG_W pixels ("line 1" and "line 0") and six window
// registers form a 3x3 window over the grayscale stream, named as in the
// line-buffer diagram: row 2 is the newest row, column 2 the newest column,
// and P_11 the centre. For the centre pixel
//     Gx = P_10 - P_12        Gy = P_01 - P_21
// as 9-bit signed numbers. (Both differences are the negation of the
// textbook I(x+1)-I(x-1); the gradient direction turns by 180 degrees, which
// the unsigned 0..180 degree histogram does not see.)
//
// The centre lags the input by IMG_W+1 pixels. Pixels on the image border have
// no full neighbourhood and get Gx = Gy = 0. After the last pixel of a frame
// the module advances on its own for IMG_W+1 cycles, shifting in zeros, to
// emit the last row; the source must leave at least IMG_W+1 idle cycles
// between frames (vertical blanking), which an assertion checks.
//
// Interface: in_valid/in_sof/in_pix; out_valid/out_sof/gx/gy, one gradient
// per pixel in raster order, out_sof on pixel (0,0).
// Timing: a gradient leaves one cycle after the window advance that forms it.
// The corner registers P_20 and P_00 of the diagram are kept for a complete
// 3x3 window although Gx and Gy do not read them; synthesis removes them.
//
// Paper: the window and buffer structure, the 640-pixel depth and Eq. (5),(6).
// Own choices: zero gradient on the border, the self-flush, and the use of an
// addressed ring buffer for each line.
module deltaxy
  import hog_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  gray_t in_pix,
  output logic  out_valid,
  output logic  out_sof,
  output grad_t gx,
  output grad_t gy
);

  localparam int XW = $clog2(IMG_W);
  localparam int NPIX = IMG_W * IMG_H;
  localparam int LAG = IMG_W + 1;
  localparam int CW = $clog2(NPIX + LAG + 1);

  gray_t line1 [IMG_W];
  gray_t line0 [IMG_W];
  logic [XW-1:0] ptr;

  gray_t p21, p20, p11, p10, p01, p00;
  gray_t pix22, pix12, pix02;

  logic [CW-1:0] in_cnt;     // pixels (and flush steps) taken in this frame
  logic [XW-1:0] cx;         // centre column
  logic [15:0]   cy;         // centre row
  logic          flushing;
  logic          adv;
  logic [XW-1:0] ptr_a;
  logic [CW-1:0] cnt_a;

  assign flushing = (in_cnt >= CW'(NPIX)) && (in_cnt < CW'(NPIX + LAG));
  assign adv      = in_valid || flushing;
  // a frame start restarts the window fill
  assign ptr_a    = (in_valid && in_sof) ? '0 : ptr;
  assign cnt_a    = (in_valid && in_sof) ? '0 : in_cnt;

  assign pix22 = in_valid ? in_pix : '0;
  assign pix12 = line1[ptr_a];
  assign pix02 = line0[ptr_a];

  always_ff @(posedge clk) begin
    if (adv) begin
      line1[ptr_a] <= pix22;
      line0[ptr_a] <= pix12;
      p21 <= pix22;  p20 <= p21;
      p11 <= pix12;  p10 <= p11;
      p01 <= pix02;  p00 <= p01;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr       <= '0;
      in_cnt    <= CW'(NPIX + LAG);
      cx        <= '0;
      cy        <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      gx        <= '0;
      gy        <= '0;
    end else begin
      out_valid <= 1'b0;
      if (adv) begin
        ptr    <= (ptr_a == XW'(IMG_W - 1)) ? '0 : ptr_a + 1'b1;
        in_cnt <= cnt_a + 1'b1;
        if (cnt_a >= CW'(LAG)) begin
          // the window centre is pixel (cx, cy)
          out_valid <= 1'b1;
          out_sof   <= (cnt_a == CW'(LAG));
          if (cx == 0 || cx == XW'(IMG_W - 1) || cy == 0 || cy == 16'(IMG_H - 1)) begin
            gx <= '0;
            gy <= '0;
          end else begin
            gx <= grad_t'({1'b0, p10}) - grad_t'({1'b0, pix12});
            gy <= grad_t'({1'b0, p01}) - grad_t'({1'b0, p21});
          end
          if (cx == XW'(IMG_W - 1)) begin
            cx <= '0;
            cy <= cy + 16'd1;
          end else begin
            cx <= cx + 1'b1;
          end
        end else begin
          cx <= '0;
          cy <= '0;
        end
      end
    end
  end

  // a new frame must not arrive while the previous one is still flushing
  assert property (@(posedge clk) disable iff (!rst_n) flushing |-> !in_valid)
    else $error("deltaxy: frame started during flush of the previous frame");

endmodule
