// cordic_vec: pipelined vectoring CORDIC giving gradient magnitude and angle.
//
// For a gradient (Gx, Gy) it returns
//     gra   = sqrt(Gx^2 + Gy^2)   unsigned, 9 integer + 6 fractional bits
//     orien = atan2(Gy, Gx)       radians in (-pi, pi], signed 3.13
// A first stage folds the left half-plane onto the right one (negating the
// vector and starting the angle at +-pi). ITER micro-rotation stages then
// drive y to zero, each adding or subtracting atan(2^-i) to the angle. The
// last stage removes the CORDIC gain (x 0.60725) and rounds both results.
// Internally x and y carry 14 fractional bits and the angle 16.
//
// Interface: in_valid/in_sof/gx/gy; out_valid/out_sof/gra/orien.
// Timing: fully pipelined, one vector per clock, latency ITER+2 cycles.
//
// Paper: the function (vector translation), the output widths and fraction
// bits. The paper uses a vendor CORDIC core; this micro-architecture, the
// iteration count and the internal widths are this design's choices.
module cordic_vec
  import hog_pkg::*;
#(
  parameter int unsigned ITER = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  grad_t gx,
  input  grad_t gy,
  output logic  out_valid,
  output logic  out_sof,
  output mag_t  gra,
  output ang_t  orien
);

  localparam int FXY = 14;          // fractional bits of x, y
  localparam int XYW = 9 + 2 + FXY; // sign + 9 bits + growth
  localparam int ZW  = 20;          // angle, 16 fractional bits
  localparam logic [16:0] KINV = 17'd39797;    // 0.6072529 * 2^16
  localparam int PI_Q16 = 205887;

  // atan(2^-i) * 2^16
  localparam int ATAN [18] = '{51472, 30386, 16055, 8150, 4091, 2047, 1024, 512,
                               256, 128, 64, 32, 16, 8, 4, 2, 1, 0};

  typedef logic signed [XYW-1:0] xy_t;
  typedef logic signed [ZW-1:0]  z_t;

  xy_t  xs [ITER+1];
  xy_t  ys [ITER+1];
  z_t   zs [ITER+1];
  logic vs [ITER+1];
  logic ss [ITER+1];

  // stage 0: fold into the right half-plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs[0] <= 1'b0;
      ss[0] <= 1'b0;
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
    end else begin
      vs[0] <= in_valid;
      ss[0] <= in_sof;
      if (gx < 0) begin
        xs[0] <= -(xy_t'(gx) <<< FXY);
        ys[0] <= -(xy_t'(gy) <<< FXY);
        zs[0] <= (gy < 0) ? z_t'(-PI_Q16) : z_t'(PI_Q16);
      end else begin
        xs[0] <= xy_t'(gx) <<< FXY;
        ys[0] <= xy_t'(gy) <<< FXY;
        zs[0] <= '0;
      end
    end
  end

  // micro-rotations
  for (genvar i = 0; i < ITER; i++) begin : g_iter
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vs[i+1] <= 1'b0;
        ss[i+1] <= 1'b0;
        xs[i+1] <= '0;
        ys[i+1] <= '0;
        zs[i+1] <= '0;
      end else begin
        vs[i+1] <= vs[i];
        ss[i+1] <= ss[i];
        if (ys[i] >= 0) begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + z_t'(ATAN[i]);
        end else begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - z_t'(ATAN[i]);
        end
      end
    end
  end

  // gain correction and rounding
  logic [XYW+16:0] mag_full;
  logic [XYW+16:0] mag_q6;
  z_t              z_q13;
  assign mag_full = (XYW+17)'(xs[ITER]) * (XYW+17)'(KINV);   // 30 fractional bits
  assign mag_q6   = (mag_full + (XYW+17)'(1 << 23)) >> 24;
  assign z_q13    = (zs[ITER] + z_t'(4)) >>> 3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      gra       <= '0;
      orien     <= '0;
    end else begin
      out_valid <= vs[ITER];
      out_sof   <= ss[ITER];
      gra       <= (mag_q6 > (XYW+17)'(16'h7fff)) ? 15'h7fff : mag_t'(mag_q6);
      orien     <= ang_t'(z_q13);
    end
  end

endmodule
