// pixel_fifo: synchronous first-word-fall-through FIFO for grayscale pixels.
//
// Holds DEPTH entries of DW bits (here a pixel and its x,y coordinate) so the
// Avalon master can drain pixels toward SDRAM while the bus stalls. The head
// entry is visible on rd_data whenever empty is low; rd_en pops it. A write
// into a full FIFO is dropped and counted in overflow_cnt.
// Interface: wr_en/wr_data/full, rd_en/rd_data/empty, level, overflow_cnt.
// Timing: an entry written in one cycle is readable in the next.
//
// Paper: a pixel FIFO between the grayscale output and the Avalon master,
// fed with pixels and pixel coordinates. Depth, width and the overflow
// policy are this design's choices.
module pixel_fifo #(
  parameter int unsigned DW    = 40,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [DW-1:0]          wr_data,
  output logic                   full,
  input  logic                   rd_en,
  output logic [DW-1:0]          rd_data,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] level,
  output logic [31:0]            overflow_cnt
);

  localparam int AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wr_ptr, rd_ptr;
  logic          do_wr, do_rd;

  assign level   = wr_ptr - rd_ptr;
  assign empty   = (wr_ptr == rd_ptr);
  assign full    = (level == (AW+1)'(DEPTH));
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && !full;
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk)
    if (do_wr) mem[wr_ptr[AW-1:0]] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr       <= '0;
      rd_ptr       <= '0;
      overflow_cnt <= '0;
    end else begin
      if (do_wr) wr_ptr <= wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= rd_ptr + 1'b1;
      if (wr_en && full) overflow_cnt <= overflow_cnt + 32'd1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("pixel_fifo: read while empty");

endmodule
