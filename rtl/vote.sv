// vote: splits the magnitude of one pixel's gradient between orientation votes.
//
// The orientation is folded to the unsigned range [0, pi) and scaled to bin
// units, t = theta * 9/pi, so bin k covers [20k, 20k+20) degrees and has its
// centre at 20k+10 degrees. With u = t - 1/2 (wrapped modulo 9), b = floor(u)
// and f = u - b, the pixel votes (1-f)|G| to bin b and f|G| to bin (b+1) mod 9
// (linear interpolation between the two nearest bin centres, wrapping between
// bin 8 and bin 0). Votes keep the integer part of the magnitude: 9 bits.
//
// Interface: in_valid/in_sof/gra/orien; out_valid/out_sof/votes (bin8..bin0).
// Timing: two pipeline stages, one pixel per clock.
//
// Paper: 9 votes over 0..180 degrees, votes to adjacent votes weighted by the
// exact orientation, 9-bit bin outputs. The bin centres, the interpolation
// formula and the 10-bit weight are this design's choices.
module vote
  import hog_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_sof,
  input  mag_t   gra,
  input  ang_t   orien,
  output logic   out_valid,
  output logic   out_sof,
  output votes_t votes
);

  localparam logic [17:0] BINS_PER_RAD = 18'd187747;   // 9/pi * 2^16
  localparam int          NB_Q16       = 9 << 16;

  // stage 1: fold and scale
  logic signed [16:0] th;
  logic        [15:0] th_u;
  logic        [33:0] t_full;     // 29 fractional bits
  logic signed [21:0] u;          // 16 fractional bits
  always_comb begin
    th = 17'(orien);
    if (th < 0) th = th + 17'(PI_Q13);
    if (th >= 17'(PI_Q13)) th = th - 17'(PI_Q13);
    th_u   = 16'(th);
    t_full = 34'(th_u) * 34'(BINS_PER_RAD);
    u      = 22'(t_full >> 13) - 22'(1 << 15);
    if (u < 0) u = u + 22'(NB_Q16);
  end

  logic       s1_valid, s1_sof;
  mag_t       s1_gra;
  logic [3:0] s1_bin;
  logic [9:0] s1_frac;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_sof   <= 1'b0;
      s1_gra   <= '0;
      s1_bin   <= '0;
      s1_frac  <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_sof   <= in_sof;
      s1_gra   <= gra;
      s1_bin   <= (u[19:16] > 4'd8) ? 4'd8 : u[19:16];
      s1_frac  <= u[15:6];
    end
  end

  // stage 2: weight and place the two votes
  logic [24:0] up_full;
  mag_t        up_q6, lo_q6;
  logic [3:0]  nxt;
  assign up_full = 25'(s1_gra) * 25'(s1_frac);
  assign up_q6   = mag_t'(up_full >> 10);
  assign lo_q6   = s1_gra - up_q6;
  assign nxt     = (s1_bin == 4'd8) ? 4'd0 : s1_bin + 4'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      votes      <= '0;
    end else begin
      out_valid <= s1_valid;
      out_sof   <= s1_sof;
      for (int k = 0; k < NBINS; k++) begin
        if (k == int'(s1_bin))   votes[k] <= vote_t'(lo_q6 >> 6);
        else if (k == int'(nxt)) votes[k] <= vote_t'(up_q6 >> 6);
        else                     votes[k] <= '0;
      end
    end
  end

endmodule
