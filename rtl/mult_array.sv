// mult_array: R parallel signed n-bit fixed-point multipliers (one Mult Array).
//
// Each lane computes a*b, drops FRAC fraction bits and saturates the result to n bits
// (multiply unit plus recovery). All R products are registered together, so the array
// takes one operand set per cycle with a latency of one cycle; in_valid travels with
// the data. The Gate module uses two of these, a Large one with R_L lanes for the
// weight matrix with more nonzeros per row and a Small one with R_S lanes.
module mult_array
  import brds_pkg::*;
#(
  parameter int unsigned R    = 64,
  parameter int unsigned N    = N_DEF,
  parameter int unsigned FRAC = FRAC_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [R-1:0][N-1:0]       a,
  input  logic [R-1:0][N-1:0]       b,
  output logic                      out_valid,
  output logic [R-1:0][N-1:0]       p
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      p         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int j = 0; j < R; j++)
          p[j] <= N'(fx_mul(32'(signed'(a[j])), 32'(signed'(b[j])), N, FRAC));
    end
  end
endmodule
