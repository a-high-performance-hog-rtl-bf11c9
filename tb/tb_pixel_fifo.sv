// tb_pixel_fifo: self-checking test of the pixel FIFO against a queue model.
//
// Random pushes and pops on an 8-entry FIFO, with phases that fill it past
// full (overflow) and drain it to empty. Head data, empty, full, level and
// the overflow count are compared with a SystemVerilog queue every cycle.
module tb_pixel_fifo;

  localparam int DW = 40, DEPTH = 8, N = 4000;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic full, empty;
  logic [$clog2(DEPTH):0] level;
  logic [31:0] overflow_cnt;

  int checks = 0, failures = 0;
  logic [DW-1:0] model[$];
  int ovf = 0, n_full = 0;

  pixel_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      int phase;   // 0: mixed, 1: mostly writes, 2: mostly reads
      phase = (i / 200) % 3;
      @(negedge clk);
      // compare outputs with the model
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH) ||
          level != ($clog2(DEPTH)+1)'(model.size()) || overflow_cnt != 32'(ovf) ||
          (model.size() != 0 && rd_data != model[0])) begin
        failures++;
        $display("cycle %0d: empty %0d full %0d level %0d ovf %0d, model %0d entries, ovf %0d",
                 i, empty, full, level, overflow_cnt, model.size(), ovf);
      end
      if (full) n_full++;
      wr_en   = $urandom_range(0, 9) < (phase == 1 ? 8 : (phase == 2 ? 2 : 5));
      rd_en   = !empty && ($urandom_range(0, 9) < (phase == 2 ? 8 : (phase == 1 ? 2 : 5)));
      wr_data = {$urandom, $urandom} & ((64'd1 << DW) - 1);
      // model update for the coming edge
      begin
        bit was_full;
        was_full = (model.size() == DEPTH);   // a write into a full FIFO is dropped
        if (rd_en) void'(model.pop_front());
        if (wr_en) begin
          if (was_full) ovf++;
          else model.push_back(wr_data);
        end
      end
    end
    checks++;
    if (n_full == 0 || ovf == 0) begin
      failures++;
      $display("the FIFO never filled or never overflowed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
