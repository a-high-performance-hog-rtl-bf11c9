// recip_pipe: pipelined reciprocal, q = floor(2^P / d), by restoring division.
//
// The dividend is a single 1 at bit P, so each of the P+1 stages shifts the
// partial remainder left (bringing in that 1 on the first stage only),
// subtracts the divisor where it fits and records one quotient bit.
// Interface: in_valid/d in (d must not be 0), out_valid/q out.
// Timing: one operand per clock, latency P+1 cycles.
// A helper of the normaliser; the method is this design's choice.
module recip_pipe #(
  parameter int unsigned DW = 26,   // divisor width
  parameter int unsigned P  = 48    // q = 2^P / d
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [DW-1:0] d,
  output logic          out_valid,
  output logic [P:0]    q
);

  logic [DW:0]   rem [P+2];
  logic [DW-1:0] dv  [P+2];
  logic [P:0]    qq  [P+2];
  logic          v   [P+2];

  assign rem[0] = '0;
  assign dv[0]  = d;
  assign qq[0]  = '0;
  assign v[0]   = in_valid;

  for (genvar i = 0; i <= P; i++) begin : g_stage
    logic [DW+1:0] r_sh;
    assign r_sh = {rem[i], (i == 0) ? 1'b1 : 1'b0};
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v[i+1]   <= 1'b0;
        dv[i+1]  <= '0;
        rem[i+1] <= '0;
        qq[i+1]  <= '0;
      end else begin
        v[i+1]  <= v[i];
        dv[i+1] <= dv[i];
        if (r_sh >= {2'b00, dv[i]}) begin
          rem[i+1] <= (DW+1)'(r_sh - {2'b00, dv[i]});
          qq[i+1]  <= {qq[i][P-1:0], 1'b1};
        end else begin
          rem[i+1] <= (DW+1)'(r_sh);
          qq[i+1]  <= {qq[i][P-1:0], 1'b0};
        end
      end
    end
  end

  assign out_valid = v[P+1];
  assign q         = qq[P+1];

endmodule
