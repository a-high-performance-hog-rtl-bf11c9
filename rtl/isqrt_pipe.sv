// isqrt_pipe: pipelined integer square root, root = floor(sqrt(radicand)).
//
// Classic digit-by-digit method: each of the RW/2 stages brings down the next
// two radicand bits into the partial remainder, tries the digit 1 against
// (4*root + 1) and keeps it if the remainder stays non-negative.
// Interface: in_valid/radicand in, out_valid/root out.
// Timing: one operand per clock, latency RW/2 cycles.
// A helper of the normaliser; the method is this design's choice.
module isqrt_pipe #(
  parameter int unsigned RW = 52          // radicand width, even
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [RW-1:0]   radicand,
  output logic            out_valid,
  output logic [RW/2-1:0] root
);

  localparam int N = RW / 2;

  logic [RW-1:0] rad [N+1];
  logic [N+1:0]  rem [N+1];
  logic [N-1:0]  rt  [N+1];
  logic          v   [N+1];

  assign rad[0] = radicand;
  assign rem[0] = '0;
  assign rt[0]  = '0;
  assign v[0]   = in_valid;

  for (genvar i = 0; i < N; i++) begin : g_stage
    logic [N+3:0] r_sh, trial;
    assign r_sh  = {rem[i], rad[i][RW-1 -: 2]};
    assign trial = {2'b00, rt[i], 2'b01};
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v[i+1]   <= 1'b0;
        rad[i+1] <= '0;
        rem[i+1] <= '0;
        rt[i+1]  <= '0;
      end else begin
        v[i+1]   <= v[i];
        rad[i+1] <= rad[i] << 2;
        if (r_sh >= trial) begin
          rem[i+1] <= (N+2)'(r_sh - trial);
          rt[i+1]  <= {rt[i][N-2:0], 1'b1};
        end else begin
          rem[i+1] <= (N+2)'(r_sh);
          rt[i+1]  <= {rt[i][N-2:0], 1'b0};
        end
      end
    end
  end

  assign out_valid = v[N];
  assign root      = rt[N];

endmodule
