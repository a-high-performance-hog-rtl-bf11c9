// tb_cordic_vec: self-checking test of the vectoring CORDIC.
//
// Drives corner vectors and random 9-bit gradients one per clock and compares
// the magnitude (6 fractional bits) and the angle (radians, 13 fractional
// bits) with sqrt and atan2 computed in real arithmetic. Tolerance: 2 LSB on
// each. The pipeline latency must be ITER+2 cycles.
module tb_cordic_vec;
  import hog_pkg::*;

  localparam int ITER = 16, LAT = ITER + 2, N = 2000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  grad_t gx = '0, gy = '0;
  logic out_valid, out_sof;
  mag_t gra;
  ang_t orien;

  int checks = 0, failures = 0;
  int vx[$], vy[$], vc[$];
  int cyc = 0;

  cordic_vec #(.ITER(ITER)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int x, y, c;
      real m, a, dm, da;
      x = vx.pop_front();
      y = vy.pop_front();
      c = vc.pop_front();
      m = $sqrt(real'(x * x + y * y));
      a = $atan2(real'(y), real'(x));
      dm = real'(gra) / 64.0 - m;
      da = real'(orien) / 8192.0 - a;
      if (da > 3.14159265) da -= 2 * 3.14159265358979;
      if (da < -3.14159265) da += 2 * 3.14159265358979;
      checks++;
      if (dm > 2.0 / 64 || dm < -2.0 / 64 || ((x != 0 || y != 0) && (da > 2.0 / 8192 || da < -2.0 / 8192))) begin
        failures++;
        $display("(%0d,%0d): gra %0d (%f) orien %0d (%f)", x, y, gra, m, orien, a);
      end
      checks++;
      if (cyc - c != LAT) begin
        failures++;
        $display("latency %0d, expected %0d", cyc - c, LAT);
      end
    end
  end

  task automatic send(int x, int y);
    @(negedge clk);
    in_valid = 1;
    gx = grad_t'(x);
    gy = grad_t'(y);
    vx.push_back(x);
    vy.push_back(y);
    vc.push_back(cyc);
  endtask

  initial begin
    int corners [12][2] = '{'{0, 0}, '{255, 0}, '{-255, 0}, '{0, 255}, '{0, -255},
                            '{255, 255}, '{-255, -255}, '{-255, 255}, '{255, -255},
                            '{-1, 0}, '{-1, -1}, '{1, 0}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (corners[i]) send(corners[i][0], corners[i][1]);
    for (int i = 0; i < N; i++) send($urandom_range(0, 510) - 255, $urandom_range(0, 510) - 255);
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (vx.size() != 0) begin
      failures++;
      $display("%0d results missing", vx.size());
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
