// activation_pwl: piecewise-linear sigmoid or tanh, y = a*x + b.
//
// The input is clamped to [-SEG/4, SEG/4) and cut into SEG pieces of width 0.5; piece
// s = floor(2x) + SEG/2 covers [(s - SEG/2)/2, (s - SEG/2 + 1)/2). With SEG = 16 this
// is [-4, 4), beyond which sigmoid and tanh are within 0.02 of their limits. A LUT holds the two n-bit
// coefficients (a, b) of each piece, a 2n-bit word. The output is one fixed-point
// multiply-add with recovery, registered: latency one cycle, one input per cycle.
// Which function the unit computes is given only by the LUT contents, written at run
// time through lut_we (lut_ab = 0 writes a, 1 writes b of piece lut_seg).
module activation_pwl
  import brds_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned FRAC = FRAC_DEF,
  parameter int unsigned SEG  = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       lut_we,
  input  logic [$clog2(SEG)-1:0]     lut_seg,
  input  logic                       lut_ab,
  input  logic [N-1:0]               lut_data,
  input  logic                       in_valid,
  input  logic signed [N-1:0]        x,
  output logic                       out_valid,
  output logic signed [N-1:0]        y
);
  localparam int signed XMAX = ((SEG / 4) << FRAC) - 1;
  localparam int signed XMIN = -((SEG / 4) << FRAC);

  logic [N-1:0] lut_a [SEG];
  logic [N-1:0] lut_b [SEG];

  always_ff @(posedge clk) begin
    if (lut_we) begin
      if (lut_ab) lut_b[lut_seg] <= lut_data;
      else        lut_a[lut_seg] <= lut_data;
    end
  end

  logic signed [31:0]        xc;
  logic [$clog2(SEG)-1:0]    seg;
  logic signed [N-1:0]       y_next;
  always_comb begin
    xc = 32'(x);
    if (xc > XMAX) xc = XMAX;
    if (xc < XMIN) xc = XMIN;
    seg    = ($clog2(SEG))'((xc >>> (FRAC - 1)) + 32'(SEG / 2));
    y_next = N'(fx_add(fx_mul(32'(signed'(lut_a[seg])), xc, N, FRAC), 32'(signed'(lut_b[seg])), N));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_next;
    end
  end
endmodule
