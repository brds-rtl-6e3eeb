// ma_selector: the multiplexer that decides which Mult Array serves which weight set.
//
// The Gate module has a Large MA (RL lanes) and a Small MA (RS lanes). The weight
// matrix with more nonzeros per row after pruning (W_x or W_h) must go to the Large
// one. With sel_x_large = 0 the recurrent set (W_h row, h operands) feeds the Large MA
// and the input set (W_x row, x operands) feeds the Small MA; sel_x_large = 1 swaps
// them. A set narrower than its MA is padded with zero lanes; lanes of a set wider
// than its MA are not routed, so the configuration must give each set an MA at least
// as wide. Combinational.
module ma_selector
  import brds_pkg::*;
#(
  parameter int unsigned RX = 20,
  parameter int unsigned RH = 64,
  parameter int unsigned RL = 64,
  parameter int unsigned RS = 20,
  parameter int unsigned N  = N_DEF
) (
  input  logic                  sel_x_large,
  input  logic [RX-1:0][N-1:0]  wx,
  input  logic [RX-1:0][N-1:0]  xv,
  input  logic [RH-1:0][N-1:0]  wh,
  input  logic [RH-1:0][N-1:0]  hv,
  output logic [RL-1:0][N-1:0]  large_w,
  output logic [RL-1:0][N-1:0]  large_v,
  output logic [RS-1:0][N-1:0]  small_w,
  output logic [RS-1:0][N-1:0]  small_v
);
  always_comb begin
    large_w = '0;
    large_v = '0;
    small_w = '0;
    small_v = '0;
    if (sel_x_large) begin
      for (int j = 0; j < RL; j++) if (j < RX) begin large_w[j] = wx[j]; large_v[j] = xv[j]; end
      for (int j = 0; j < RS; j++) if (j < RH) begin small_w[j] = wh[j]; small_v[j] = hv[j]; end
    end else begin
      for (int j = 0; j < RL; j++) if (j < RH) begin large_w[j] = wh[j]; large_v[j] = hv[j]; end
      for (int j = 0; j < RS; j++) if (j < RX) begin small_w[j] = wx[j]; small_v[j] = xv[j]; end
    end
  end
endmodule
