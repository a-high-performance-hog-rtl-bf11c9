// hog_extractor: the HOG feature pipeline from grayscale pixels to
// normalised block features.
//
//   gray pixel -> deltaxy (line buffers, Gx, Gy) -> cordic_vec (|G|, angle)
//   -> vote (9 votes, interpolated) -> aggregate (8x8 cell hogs)
//   -> normalize (2x2-cell blocks, L2, float)
//
// There is no frame buffer: every stage works on the pixel stream and accepts
// one pixel per clock, so the frame rate is the pixel clock divided by the
// frame size (plus blanking). Cell hogs are also brought out for inspection.
// Interface: in_valid/in_sof/in_pix; cell_valid/cell_sof/cell_hog;
// blk_valid/blk_sof/feat.
// Timing: cell (cx,cy) leaves about IMG_W+1+CORDIC_ITER+6 cycles after the
// last pixel of the cell enters; a block leaves 80 cycles after its last cell.
//
// Paper: the chain of stages and their port widths. Sizes are parameters
// whose defaults are the paper's 640x480 frame.
module hog_extractor
  import hog_pkg::*;
#(
  parameter int unsigned IMG_W       = 640,
  parameter int unsigned IMG_H       = 480,
  parameter int unsigned CORDIC_ITER = 16,
  parameter int unsigned EPS         = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  gray_t in_pix,
  output logic  cell_valid,
  output logic  cell_sof,
  output cell_t cell_hog,
  output logic  blk_valid,
  output logic  blk_sof,
  output feat_t feat
);

  logic   g_valid, g_sof;
  grad_t  deltax, deltay;
  logic   c_valid, c_sof;
  mag_t   gra;
  ang_t   orien;
  logic   v_valid, v_sof;
  votes_t votes;

  deltaxy #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_deltaxy (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix,
    .out_valid(g_valid), .out_sof(g_sof), .gx(deltax), .gy(deltay)
  );

  cordic_vec #(.ITER(CORDIC_ITER)) u_cordic (
    .clk, .rst_n, .in_valid(g_valid), .in_sof(g_sof), .gx(deltax), .gy(deltay),
    .out_valid(c_valid), .out_sof(c_sof), .gra, .orien
  );

  vote u_vote (
    .clk, .rst_n, .in_valid(c_valid), .in_sof(c_sof), .gra, .orien,
    .out_valid(v_valid), .out_sof(v_sof), .votes
  );

  aggregate #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_aggregate (
    .clk, .rst_n, .in_valid(v_valid), .in_sof(v_sof), .votes,
    .cell_hog_valid(cell_valid), .cell_sof, .cell_hog
  );

  normalize #(.IMG_W(IMG_W), .IMG_H(IMG_H), .EPS(EPS)) u_normalize (
    .clk, .rst_n, .cell_valid, .cell_sof, .cell_hog,
    .blk_valid, .blk_sof, .feat
  );

endmodule
