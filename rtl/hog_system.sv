// hog_system: the FPGA side of the pedestrian-detection system.
//
// The camera's raw Bayer pixels pass through the Bayer filter, and the
// resulting grayscale stream feeds two paths at once:
//   * the HOG extractor, whose normalised block features are written to HPS
//     memory by the feature DMA (Avalon-MM, 128 bits), and
//   * the pixel FIFO, drained by an Avalon-MM write master that stores the
//     grayscale frame in HPS memory (one byte per pixel) for display.
// The camera, its I2C configuration, the HPS with its SDRAM and the VGA
// output are outside this module; their connections are ports.
//
// Ports: raw_valid/raw_sof/raw_pixel from the camera (raw_sof on pixel (0,0));
// feat_avm_* and pix_avm_* Avalon-MM write masters toward the HPS bridge;
// status counters for dropped data and bus stalls; the cell and block
// strobes for observation.
// Timing: one pixel per clock; frames must be separated by at least IMG_W+1
// idle cycles.
//
// Paper: the system diagram (sensor, Bayer filter, HOG pipeline, DMA, pixel
// FIFO, Avalon master, HPS) and the 640x480 frame. Bus widths, base
// addresses and FIFO depths are this design's choices.
module hog_system
  import hog_pkg::*;
#(
  parameter int unsigned IMG_W       = 640,
  parameter int unsigned IMG_H       = 480,
  parameter int unsigned CORDIC_ITER = 16,
  parameter int unsigned EPS         = 1,
  parameter int unsigned PIX_FIFO    = 1024,
  parameter int unsigned FEAT_FIFO   = 16,
  parameter logic [31:0] PIX_BASE    = 32'h3000_0000,
  parameter logic [31:0] FEAT_BASE   = 32'h3800_0000
) (
  input  logic         clk,
  input  logic         rst_n,
  // camera conduit
  input  logic         raw_valid,
  input  logic         raw_sof,
  input  raw_t         raw_pixel,
  // HOG feature DMA toward HPS memory
  output logic [31:0]  feat_avm_address,
  output logic         feat_avm_write,
  output logic [127:0] feat_avm_writedata,
  input  logic         feat_avm_waitrequest,
  // grayscale frame toward HPS memory
  output logic [31:0]  pix_avm_address,
  output logic         pix_avm_write,
  output logic [7:0]   pix_avm_writedata,
  input  logic         pix_avm_waitrequest,
  // observation and status
  output logic         cell_valid,
  output logic         blk_valid,
  output logic         blk_sof,
  output logic [31:0]  pix_overflow_cnt,
  output logic [31:0]  feat_drop_cnt,
  output logic [31:0]  pix_stall_cycles,
  output logic [31:0]  feat_stall_cycles
);

  logic        g_valid, g_sof;
  gray_t       g_pix;
  logic [15:0] g_x, g_y;

  bayer_gray #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_bayer (
    .clk, .rst_n, .raw_valid, .raw_sof, .raw_pixel,
    .gray_valid(g_valid), .gray_sof(g_sof), .gray_pixel(g_pix),
    .gray_x(g_x), .gray_y(g_y)
  );

  // HOG path
  logic  cell_sof;
  cell_t cell_hog;
  feat_t feat;

  hog_extractor #(.IMG_W(IMG_W), .IMG_H(IMG_H), .CORDIC_ITER(CORDIC_ITER), .EPS(EPS)) u_hog (
    .clk, .rst_n, .in_valid(g_valid), .in_sof(g_sof), .in_pix(g_pix),
    .cell_valid, .cell_sof, .cell_hog, .blk_valid, .blk_sof, .feat
  );

  hog_dma #(.BASE_ADDR(FEAT_BASE), .FIFO_DEPTH(FEAT_FIFO)) u_dma (
    .clk, .rst_n, .blk_valid, .blk_sof, .feat,
    .avm_address(feat_avm_address), .avm_write(feat_avm_write),
    .avm_writedata(feat_avm_writedata), .avm_waitrequest(feat_avm_waitrequest),
    .stall_cycles(feat_stall_cycles), .drop_cnt(feat_drop_cnt)
  );

  // display path
  logic        f_empty, f_full, f_rd;
  logic [39:0] f_data;
  logic [$clog2(PIX_FIFO):0] f_level;

  pixel_fifo #(.DW(40), .DEPTH(PIX_FIFO)) u_pix_fifo (
    .clk, .rst_n, .wr_en(g_valid), .wr_data({g_y, g_x, g_pix}), .full(f_full),
    .rd_en(f_rd), .rd_data(f_data), .empty(f_empty), .level(f_level),
    .overflow_cnt(pix_overflow_cnt)
  );

  pixel_avalon_master #(.IMG_W(IMG_W), .BASE_ADDR(PIX_BASE)) u_pix_master (
    .clk, .rst_n, .fifo_empty(f_empty), .fifo_data(f_data), .fifo_rd(f_rd),
    .avm_address(pix_avm_address), .avm_write(pix_avm_write),
    .avm_writedata(pix_avm_writedata), .avm_waitrequest(pix_avm_waitrequest),
    .stall_cycles(pix_stall_cycles)
  );

endmodule
