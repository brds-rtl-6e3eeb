// gate_unit: the Gate module, one gate pre-activation W_x*x + W_h*h + b per matrix row.
//
// Each cycle it takes one chunk of a sparse row: RX nonzero input weights with their
// x operands and RH nonzero recurrent weights with their h operands. The MA Selector
// routes the two sets to the Large (RL) and Small (RS) Mult Arrays, which work in the
// same cycle; their products are concatenated and summed by the ternary Tree Adder;
// the Accumulator adds the chunk sums of one row (restarting on `first`), and on the
// row's `last` chunk the Adder adds the bias. Every add and multiply saturates to n
// bits. Pipeline: products, tree sum, accumulator and bias sum are each registered,
// so a row's result leaves 4 cycles after its last chunk enters; a new chunk can
// enter every cycle. `tag` (row and gate identifiers) travels with the data.
// rst_n is the asynchronous reset of the registers and also disables the assertions;
// a linter may count that second use as a synchronous one, which it is not in the circuit.
module gate_unit
  import brds_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned FRAC = FRAC_DEF,
  parameter int unsigned RX   = 20,
  parameter int unsigned RH   = 64,
  parameter int unsigned RL   = 64,
  parameter int unsigned RS   = 20,
  parameter int unsigned TW   = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  sel_x_large,
  input  logic                  in_valid,
  input  logic                  first,
  input  logic                  last,
  input  logic [TW-1:0]         tag,
  input  logic [RX-1:0][N-1:0]  wx,
  input  logic [RX-1:0][N-1:0]  xv,
  input  logic [RH-1:0][N-1:0]  wh,
  input  logic [RH-1:0][N-1:0]  hv,
  input  logic signed [N-1:0]   bias,
  output logic                  out_valid,
  output logic [TW-1:0]         out_tag,
  output logic signed [N-1:0]   out_pre
);
  logic [RL-1:0][N-1:0] lw, lv, lp;
  logic [RS-1:0][N-1:0] sw, sv, sp;
  logic                 lp_valid, sp_valid;

  ma_selector #(.RX(RX), .RH(RH), .RL(RL), .RS(RS), .N(N)) u_sel (
    .sel_x_large, .wx, .xv, .wh, .hv,
    .large_w(lw), .large_v(lv), .small_w(sw), .small_v(sv));

  mult_array #(.R(RL), .N(N), .FRAC(FRAC)) u_large (
    .clk, .rst_n, .in_valid, .a(lw), .b(lv), .out_valid(lp_valid), .p(lp));
  mult_array #(.R(RS), .N(N), .FRAC(FRAC)) u_small (
    .clk, .rst_n, .in_valid, .a(sw), .b(sv), .out_valid(sp_valid), .p(sp));

  // Side pipeline for the control bits and the bias.
  logic          s1_first, s1_last, s2_first, s2_last, s3_last;
  logic [TW-1:0] s1_tag, s2_tag, s3_tag;
  logic [N-1:0]  s1_bias, s2_bias, s3_bias;

  logic                 t_valid;
  logic signed [N-1:0]  t_sum;
  logic                 a_valid;
  logic signed [N-1:0]  acc;

  tree_adder #(.R(RL + RS), .N(N)) u_tree (
    .clk, .rst_n, .in_valid(lp_valid), .x({sp, lp}), .out_valid(t_valid), .sum(t_sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {s1_first, s1_last, s2_first, s2_last, s3_last} <= '0;
      {s1_tag, s2_tag, s3_tag}    <= '0;
      {s1_bias, s2_bias, s3_bias} <= '0;
      a_valid   <= 1'b0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      out_pre   <= '0;
    end else begin
      // stage 1: products
      s1_first <= first;  s1_last <= last;  s1_tag <= tag;  s1_bias <= bias;
      // stage 2: tree sum
      s2_first <= s1_first;  s2_last <= s1_last;  s2_tag <= s1_tag;  s2_bias <= s1_bias;
      // stage 3: accumulator
      a_valid <= t_valid;
      if (t_valid) begin
        acc     <= s2_first ? t_sum : N'(fx_add(32'(acc), 32'(t_sum), N));
        s3_last <= s2_last;
        s3_tag  <= s2_tag;
        s3_bias <= s2_bias;
      end
      // stage 4: bias adder
      out_valid <= a_valid && s3_last;
      if (a_valid && s3_last) begin
        out_pre <= N'(fx_add(32'(acc), 32'(signed'(s3_bias)), N));
        out_tag <= s3_tag;
      end
    end
  end

  // The two arrays always run in lockstep.
  assert property (@(posedge clk) disable iff (!rst_n) lp_valid == sp_valid);
endmodule
