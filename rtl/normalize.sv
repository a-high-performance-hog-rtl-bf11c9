// normalize: block-wise L2 contrast normalisation of cell histograms.
//
// A block is 2x2 cells (cell0 top-left, cell1 top-right, cell2 bottom-left,
// cell3 bottom-right), 36 bins v_i in all, and every bin is replaced by
//     v_i / sqrt(sum_j v_j^2 + EPS^2)
// delivered as a 32-bit IEEE-754 single. Blocks do not overlap (stride of two
// cells), so a frame of 80x60 cells gives 40x30 blocks = 80x60x9 features.
//
// Cells arrive in raster order. Cells of even cell rows are kept in a row
// buffer of IMG_W/8 entries; in odd rows the even-column cell is held in a
// register, and the odd-column cell completes a block. The block then flows
// through a pipeline: 36 squares, a sum (+EPS^2), an integer square root of
// the sum scaled by 2^16 (a norm with 8 fractional bits), a reciprocal
// R = 2^48 / norm, 36 products v_i * R giving fixed point results with 24
// fractional bits, and the fixed-to-float conversion. Only the last step is
// floating point.
//
// Interface: cell_valid/cell_sof/cell_hog in; blk_valid/blk_sof/feat out,
// feat[9*c + k] = cell c, bin k; blk_sof marks block (0,0).
// Timing: fully pipelined, a block per clock at most; latency 3 + 26 + 49 + 2
// cycles from the completing cell.
//
// Paper: 4-cell blocks, L2 normalisation per Eq. (7), integer and fixed point
// arithmetic up to a final conversion to 32-bit floating point, and a
// pipelined normaliser. Block stride, EPS, cell order in the block, and the
// square root / reciprocal method are this design's choices.
module normalize
  import hog_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480,
  parameter int unsigned EPS   = 1      // in magnitude units of the histogram
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cell_valid,
  input  logic  cell_sof,
  input  cell_t cell_hog,
  output logic  blk_valid,
  output logic  blk_sof,
  output feat_t feat
);

  localparam int NCX = IMG_W / CELL;
  localparam int NCY = IMG_H / CELL;
  localparam int CXW = $clog2(NCX);
  localparam int RW  = 52;              // radicand (sum of squares << 16)
  localparam int P   = 48;
  localparam int DLY = 1 + 1 + RW/2 + P + 1;   // squares .. reciprocal

  typedef cbin_t [NFEAT-1:0] bvals_t;

  // ---------------- block assembly ----------------
  logic [CXW-1:0] cx, ccx;
  logic [15:0]    cy, ccy;
  cell_t          row_buf [NCX];
  cell_t          left_q;

  assign ccx = cell_sof ? '0 : cx;
  assign ccy = cell_sof ? '0 : cy;

  logic   b_valid, b_sof;
  bvals_t b_vals;

  always_ff @(posedge clk) begin
    if (cell_valid && !ccy[0]) row_buf[ccx] <= cell_hog;
    if (cell_valid &&  ccy[0] && !ccx[0]) left_q <= cell_hog;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx      <= '0;
      cy      <= '0;
      b_valid <= 1'b0;
      b_sof   <= 1'b0;
      b_vals  <= '0;
    end else begin
      b_valid <= 1'b0;
      if (cell_valid) begin
        if (ccy[0] && ccx[0]) begin
          b_valid <= 1'b1;
          b_sof   <= (ccx == CXW'(1)) && (ccy == 16'd1);
          b_vals  <= {cell_hog, left_q, row_buf[ccx], row_buf[ccx - 1'b1]};
        end
        if (ccx == CXW'(NCX - 1)) begin
          cx <= '0;
          cy <= (ccy == 16'(NCY - 1)) ? '0 : ccy + 16'd1;
        end else begin
          cx <= ccx + 1'b1;
          cy <= ccy;
        end
      end
    end
  end

  // ---------------- squares and sum ----------------
  logic [NFEAT-1:0][29:0] sq;
  logic                   sq_valid;
  logic [RW-1:0]          rad;
  logic                   rad_valid;
  logic [RW-1:0]          ssum;

  always_comb begin
    ssum = RW'(EPS * EPS);
    for (int i = 0; i < NFEAT; i++) ssum = ssum + RW'(sq[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sq_valid  <= 1'b0;
      sq        <= '0;
      rad_valid <= 1'b0;
      rad       <= '0;
    end else begin
      sq_valid <= b_valid;
      for (int i = 0; i < NFEAT; i++) sq[i] <= 30'(b_vals[i]) * 30'(b_vals[i]);
      rad_valid <= sq_valid;
      rad       <= ssum << 16;
    end
  end

  // ---------------- norm and its reciprocal ----------------
  logic              rt_valid, rc_valid;
  logic [RW/2-1:0]   norm_q8;
  logic [P:0]        recip;

  isqrt_pipe #(.RW(RW)) u_sqrt (
    .clk, .rst_n, .in_valid(rad_valid), .radicand(rad),
    .out_valid(rt_valid), .root(norm_q8)
  );

  recip_pipe #(.DW(RW/2), .P(P)) u_recip (
    .clk, .rst_n, .in_valid(rt_valid), .d(norm_q8),
    .out_valid(rc_valid), .q(recip)
  );

  // the bins and the frame flag travel alongside
  bvals_t d_vals [DLY];
  logic   d_sof  [DLY];
  always_ff @(posedge clk) begin
    d_vals[0] <= b_vals;
    d_sof[0]  <= b_sof;
    for (int i = 1; i < DLY; i++) begin
      d_vals[i] <= d_vals[i-1];
      d_sof[i]  <= d_sof[i-1];
    end
  end

  // ---------------- scale and convert ----------------
  logic [NFEAT-1:0][24:0] yq;
  logic                   y_valid, y_sof;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid   <= 1'b0;
      y_sof     <= 1'b0;
      yq        <= '0;
      blk_valid <= 1'b0;
      blk_sof   <= 1'b0;
      feat      <= '0;
    end else begin
      y_valid <= rc_valid;
      y_sof   <= d_sof[DLY-1];
      for (int i = 0; i < NFEAT; i++) begin
        logic [64:0] prod;
        prod  = 65'(d_vals[DLY-1][i]) * 65'(recip);
        yq[i] <= (prod[64:16] > 49'(1 << 24)) ? 25'(1 << 24) : prod[40:16];
      end
      blk_valid <= y_valid;
      blk_sof   <= y_sof;
      for (int i = 0; i < NFEAT; i++) feat[i] <= fix_to_float(yq[i]);
    end
  end

endmodule
