// tb_pixel_avalon_master: self-checking test of the pixel write master.
//
// A queue stands in for the pixel FIFO (first word fall through) and a byte
// array for SDRAM behind an Avalon-MM slave that raises waitrequest at random.
// A 16x4 frame is offered with its pixels out of raster order; afterwards
// every byte must sit at BASE + y*W + x. The test also counts stalled cycles,
// checks the master's stall counter and that one write per clock is reached
// when the slave never stalls.
module tb_pixel_avalon_master;

  localparam int W = 16, H = 4;
  localparam logic [31:0] BASE = 32'h0000_1000;

  logic clk = 0, rst_n = 0;
  logic fifo_empty, fifo_rd;
  logic [39:0] fifo_data;
  logic [31:0] avm_address, stall_cycles;
  logic avm_write, avm_waitrequest;
  logic [7:0] avm_writedata;

  int checks = 0, failures = 0;
  logic [39:0] q[$];
  byte unsigned mem [int];
  byte unsigned img [H][W];
  int stalls = 0, writes = 0, stall_mode = 1;

  pixel_avalon_master #(.IMG_W(W), .BASE_ADDR(BASE)) dut (.*);

  always #5 clk = ~clk;

  assign fifo_empty = (q.size() == 0);
  assign fifo_data  = fifo_empty ? '0 : q[0];

  always @(posedge clk) begin
    if (rst_n) begin
      if (fifo_rd) void'(q.pop_front());
      if (avm_write && !avm_waitrequest) begin
        mem[int'(avm_address)] = avm_writedata;
        writes++;
      end
      if (avm_write && avm_waitrequest) stalls++;
    end
  end

  always @(negedge clk) avm_waitrequest <= stall_mode ? ($urandom_range(0, 2) == 0) : 1'b0;

  initial begin
    int order[$];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        img[y][x] = byte'($urandom);
        order.push_back(y * W + x);
      end
    order.shuffle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (order[i]) begin
      int x, y;
      x = order[i] % W;
      y = order[i] / W;
      q.push_back({16'(y), 16'(x), img[y][x]});
    end
    wait (q.size() == 0);
    repeat (5) @(posedge clk);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int a;
        a = int'(BASE) + y * W + x;
        checks++;
        if (!mem.exists(a) || mem[a] != img[y][x]) begin
          failures++;
          $display("pixel (%0d,%0d) missing or wrong at %h", x, y, a);
        end
      end
    checks++;
    if (writes != W * H || stall_cycles != 32'(stalls) || stalls == 0) begin
      failures++;
      $display("writes %0d stalls %0d counter %0d", writes, stalls, stall_cycles);
    end
    // throughput without stalls: W pixels in W + 2 cycles
    stall_mode = 0;
    @(negedge clk);
    writes = 0;
    for (int x = 0; x < W; x++) q.push_back({16'(0), 16'(x), 8'(x)});
    repeat (W + 2) @(posedge clk);
    checks++;
    if (writes != W) begin
      failures++;
      $display("only %0d writes in %0d cycles", writes, W + 2);
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
