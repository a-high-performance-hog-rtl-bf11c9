// tb_vote: self-checking test of the orientation-bin voting.
//
// Random magnitudes and angles over (-pi, pi], plus angles on bin centres and
// on the wrap between bin 8 and bin 0, are driven one per clock. The expected
// votes are worked out in real arithmetic: fold to [0, 180) degrees, bin
// centres at 10 + 20k degrees, linear split between the two nearest centres.
// Each of the 9 outputs may differ by 1 from the expected value (truncation);
// every other bin must be 0. Latency must be 2 cycles.
module tb_vote;
  import hog_pkg::*;

  localparam int N = 3000, LAT = 2;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  mag_t gra = '0;
  ang_t orien = '0;
  logic out_valid, out_sof;
  votes_t votes;

  int checks = 0, failures = 0;
  int qg[$], qa[$], qc[$];
  int cyc = 0;

  vote dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int g, a, c, b, e[9];
      real th, u, f, gm;
      g = qg.pop_front();
      a = qa.pop_front();
      c = qc.pop_front();
      th = real'(a) / 8192.0;
      if (th < 0) th += PI;
      if (th >= PI) th -= PI;
      u = th * 9.0 / PI - 0.5;
      if (u < 0) u += 9.0;
      b = int'($floor(u));
      if (b > 8) b = 8;
      f = u - b;
      gm = real'(g) / 64.0;
      foreach (e[k]) e[k] = 0;
      e[b] = int'($floor(gm * (1.0 - f)));
      e[(b + 1) % 9] = int'($floor(gm * f));
      for (int k = 0; k < 9; k++) begin
        checks++;
        if (int'(votes[k]) > e[k] + 1 || int'(votes[k]) < e[k] - 1) begin
          failures++;
          $display("g=%0d a=%0d bin %0d: got %0d exp %0d", g, a, k, votes[k], e[k]);
        end
      end
      checks++;
      if (cyc - c != LAT) begin
        failures++;
        $display("latency %0d", cyc - c);
      end
    end
  end

  task automatic send(int g, int a);
    @(negedge clk);
    in_valid = 1;
    gra   = mag_t'(g);
    orien = ang_t'(a);
    qg.push_back(g);
    qa.push_back(a);
    qc.push_back(cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // centres of bins 0, 4, 8; boundary 0 / 180 degrees; negative angles
    send(64 * 100, int'(10.0 * PI / 180 * 8192));
    send(64 * 100, int'(90.0 * PI / 180 * 8192));
    send(64 * 100, int'(170.0 * PI / 180 * 8192));
    send(64 * 100, 0);
    send(64 * 100, 25736);
    send(64 * 100, -25736);
    send(64 * 361, int'(-30.0 * PI / 180 * 8192));
    for (int i = 0; i < N; i++) send($urandom_range(0, 23100), $urandom_range(0, 2 * 25736) - 25736);
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (qg.size() != 0) begin
      failures++;
      $display("%0d results missing", qg.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
