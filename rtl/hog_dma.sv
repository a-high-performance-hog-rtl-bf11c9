// hog_dma: writes normalised HOG blocks to HPS memory over Avalon-MM.
//
// Each block from the normaliser (36 single-precision features, 1152 bits)
// enters a FIFO of FIFO_DEPTH blocks. The write side takes one block at a
// time and sends it as 9 beats of 128 bits (features 4k..4k+3 in beat k,
// lowest feature in the lowest bits) to
//     BASE_ADDR + block_index * 144 + beat * 16
// where block_index counts blocks since the block that carried the frame
// flag, so each frame's features form one array of 40x30 blocks x 36 floats
// at the default size. Bus stalls (waitrequest) are absorbed by the FIFO; a
// block arriving at a full FIFO is dropped and counted in drop_cnt.
// Interface: blk_valid/blk_sof/feat in; avm_address, avm_write,
// avm_writedata, avm_waitrequest out/in; stall_cycles, drop_cnt.
// Timing: one beat per clock without stalls, so a block takes 9 cycles;
// the normaliser produces at most one block per 16 pixel clocks.
//
// Paper: a DMA writes the normalised features into HPS memory through the
// FPGA-to-HPS bridge. The paper uses a platform DMA; this write master, the
// 128-bit width, the FIFO and the memory layout are this design's choices.
module hog_dma
  import hog_pkg::*;
#(
  parameter logic [31:0] BASE_ADDR  = 32'h3800_0000,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         blk_valid,
  input  logic         blk_sof,
  input  feat_t        feat,
  output logic [31:0]  avm_address,
  output logic         avm_write,
  output logic [127:0] avm_writedata,
  input  logic         avm_waitrequest,
  output logic [31:0]  stall_cycles,
  output logic [31:0]  drop_cnt
);

  localparam int AW    = $clog2(FIFO_DEPTH);
  localparam int BEATS = NFEAT / 4;

  typedef struct packed {
    logic  sof;
    feat_t feat;
  } entry_t;

  entry_t      mem [FIFO_DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;
  logic        empty, full, pop;

  assign empty = (wr_ptr == rd_ptr);
  assign full  = ((wr_ptr - rd_ptr) == (AW+1)'(FIFO_DEPTH));

  always_ff @(posedge clk)
    if (blk_valid && !full) mem[wr_ptr[AW-1:0]] <= '{sof: blk_sof, feat: feat};

  // current block being written
  logic        cur_valid;
  feat_t       cur;
  logic [3:0]  beat;
  logic [31:0] blk_idx, nxt_idx;
  logic        last_acc;
  entry_t      head;

  assign head      = mem[rd_ptr[AW-1:0]];
  assign last_acc  = cur_valid && (beat == 4'(BEATS - 1)) && !avm_waitrequest;
  assign pop       = (!cur_valid || last_acc) && !empty;

  assign avm_write     = cur_valid;
  assign avm_address   = BASE_ADDR + blk_idx * 32'(BEATS * 16) + 32'(beat) * 32'd16;
  assign avm_writedata = cur[beat*4 +: 4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr       <= '0;
      rd_ptr       <= '0;
      cur_valid    <= 1'b0;
      cur          <= '0;
      beat         <= '0;
      blk_idx      <= '0;
      nxt_idx      <= '0;
      stall_cycles <= '0;
      drop_cnt     <= '0;
    end else begin
      if (blk_valid) begin
        if (full) drop_cnt <= drop_cnt + 32'd1;
        else      wr_ptr   <= wr_ptr + 1'b1;
      end
      if (cur_valid && avm_waitrequest) stall_cycles <= stall_cycles + 32'd1;
      if (cur_valid && !avm_waitrequest && !last_acc) beat <= beat + 4'd1;
      if (pop) begin
        rd_ptr    <= rd_ptr + 1'b1;
        cur_valid <= 1'b1;
        cur       <= head.feat;
        beat      <= '0;
        blk_idx   <= head.sof ? 32'd0 : nxt_idx;
        nxt_idx   <= (head.sof ? 32'd0 : nxt_idx) + 32'd1;
      end else if (last_acc) begin
        cur_valid <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   avm_write && avm_waitrequest |=> avm_write && $stable(avm_address) && $stable(avm_writedata))
    else $error("hog_dma: write changed under waitrequest");

endmodule
