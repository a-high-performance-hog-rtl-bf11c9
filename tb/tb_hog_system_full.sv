// tb_hog_system_full: end-to-end test of hog_system at its default size:
// one 640x480 frame with every parameter of the design at its default.
// See hog_system_tester for the checks.
module tb_hog_system_full;
  import hog_pkg::*;

  localparam int W = 640, H = 480;

  logic clk, rst_n, raw_valid, raw_sof;
  raw_t raw_pixel;
  logic [31:0] feat_avm_address, pix_avm_address;
  logic feat_avm_write, feat_avm_waitrequest, pix_avm_write, pix_avm_waitrequest;
  logic [127:0] feat_avm_writedata;
  logic [7:0] pix_avm_writedata;
  logic cell_valid, blk_valid, blk_sof;
  logic [31:0] pix_overflow_cnt, feat_drop_cnt, pix_stall_cycles, feat_stall_cycles;

  hog_system dut (.*);

  hog_system_tester #(.W(W), .H(H), .FRAMES(1), .OVF_FRAME(1'b0)) tester (
    .*,
    .flushing(dut.u_hog.u_deltaxy.flushing),
    .vote_wrap(dut.u_hog.u_vote.s1_valid && dut.u_hog.u_vote.s1_bin == 4'd8 &&
               dut.u_hog.u_vote.s1_frac != 0)
  );

  initial begin
    repeat (2000000) @(posedge clk);
    tester.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", tester.checks, tester.failures);
    $finish;
  end

endmodule
