// add3_dsp: three-input n-bit adder with recovery (saturation).
//
// This is the arithmetic of one DSP slice configured as a three-input adder, the path
// used by the Tree Adder: operands A and D meet in the pre-adder, the multiplier passes
// the sum through (factor one) and the post-adder adds C, giving P = A + D + C. The
// sum is formed at full width and then saturated to n bits, as every add of the
// datapath is. Purely combinational; the slice's optional pipeline registers are left
// to the instantiating module.
module add3_dsp
  import brds_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic signed [N-1:0] a,
  input  logic signed [N-1:0] d,
  input  logic signed [N-1:0] c,
  output logic signed [N-1:0] p
);
  logic signed [N+1:0] full;
  always_comb begin
    full = (N+2)'(a) + (N+2)'(d) + (N+2)'(c);
    p    = N'(sat(64'(full), N));
  end
endmodule
