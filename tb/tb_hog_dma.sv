// tb_hog_dma: self-checking test of the feature DMA.
//
// Phase 1: a frame of 12 random blocks, one every 16 cycles, against an
// Avalon-MM slave that stalls at random; every 32-bit feature must land at
// BASE + block*144 + 4*feature. Phase 2: a new frame of 10 blocks back to
// back while the slave holds waitrequest high: the FIFO (4 deep) and the
// block in flight take 5, the other 5 must be counted as dropped, and after
// the stall the first 5 blocks of that frame must be in memory from BASE on.
module tb_hog_dma;
  import hog_pkg::*;

  localparam logic [31:0] BASE = 32'h0010_0000;
  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0;
  logic blk_valid = 0, blk_sof = 0;
  feat_t feat = '0;
  logic [31:0] avm_address, stall_cycles, drop_cnt;
  logic avm_write, avm_waitrequest;
  logic [127:0] avm_writedata;

  int checks = 0, failures = 0;
  logic [31:0] mem [int];
  feat_t blocks [$];
  int stall_mode = 1, stalls = 0;

  hog_dma #(.BASE_ADDR(BASE), .FIFO_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && avm_write && !avm_waitrequest)
      for (int i = 0; i < 4; i++) mem[int'(avm_address) + 4 * i] = avm_writedata[32*i +: 32];
    if (rst_n && avm_write && avm_waitrequest) stalls++;
  end

  always @(negedge clk)
    avm_waitrequest <= (stall_mode == 2) ? 1'b1 : (stall_mode == 1 ? ($urandom_range(0, 2) == 0) : 1'b0);

  task automatic check_frame(int n);
    for (int b = 0; b < n; b++)
      for (int i = 0; i < NFEAT; i++) begin
        int a;
        a = int'(BASE) + b * 144 + 4 * i;
        checks++;
        if (!mem.exists(a) || mem[a] != blocks[b][i]) begin
          failures++;
          $display("block %0d feature %0d wrong at %h", b, i, a);
        end
      end
  endtask

  task automatic send(bit sof);
    feat_t f;
    for (int i = 0; i < NFEAT; i++) f[i] = $urandom;
    blocks.push_back(f);
    @(negedge clk);
    blk_valid = 1;
    blk_sof   = sof;
    feat      = f;
    @(negedge clk);
    blk_valid = 0;
    blk_sof   = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 12; b++) begin
      send(b == 0);
      repeat (14) @(negedge clk);
    end
    repeat (40) @(negedge clk);
    check_frame(12);
    checks++;
    if (drop_cnt != 0 || stalls == 0 || stall_cycles != 32'(stalls)) begin
      failures++;
      $display("phase 1: drops %0d stalls %0d counter %0d", drop_cnt, stalls, stall_cycles);
    end
    // phase 2: overflow under a long stall
    stall_mode = 2;
    blocks.delete();
    mem.delete();
    @(negedge clk);
    for (int b = 0; b < 10; b++) begin
      feat_t f;
      for (int i = 0; i < NFEAT; i++) f[i] = $urandom;
      blocks.push_back(f);
      blk_valid = 1;
      blk_sof   = (b == 0);
      feat      = f;
      @(negedge clk);
    end
    blk_valid = 0;
    blk_sof   = 0;
    repeat (5) @(negedge clk);
    stall_mode = 0;
    repeat (60) @(negedge clk);
    check_frame(DEPTH + 1);
    checks++;
    if (drop_cnt != 32'(10 - DEPTH - 1) || mem.exists(int'(BASE) + (DEPTH + 1) * 144)) begin
      failures++;
      $display("phase 2: drops %0d, expected %0d", drop_cnt, 10 - DEPTH - 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
