// tree_adder: sums R n-bit operands with a ternary tree of three-input adders.
//
// Level 0 holds the R inputs; each node of level l adds three neighbours of level l-1
// (operands missing at the ragged end of a level are zero) through an add3_dsp, so
// every partial sum is saturated to n bits like every other add of the datapath. A
// tree over R inputs has ceil(log3 R) levels, e.g. 84 operands need 5. The tree is
// combinational and its result is registered once: latency one cycle, one operand
// set per cycle.
module tree_adder
  import brds_pkg::*;
#(
  parameter int unsigned R = 84,
  parameter int unsigned N = N_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [R-1:0][N-1:0]  x,
  output logic                 out_valid,
  output logic signed [N-1:0]  sum
);
  // Number of nodes on level l of the tree.
  function automatic int unsigned lvl_size(input int unsigned l);
    int unsigned s;
    s = R;
    for (int unsigned k = 0; k < l; k++) s = (s + 2) / 3;
    return s;
  endfunction

  function automatic int unsigned n_levels();
    int unsigned s, l;
    s = R;
    l = 0;
    while (s > 1) begin
      s = (s + 2) / 3;
      l++;
    end
    return l;
  endfunction

  localparam int unsigned LEVELS = n_levels();

  // Each level lives in its own generate scope; level l reads level l-1.
  logic signed [N-1:0] top_sum;

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned PREV = lvl_size(l - 1);
    localparam int unsigned CUR  = lvl_size(l);
    logic signed [N-1:0] prv [PREV];
    logic signed [N-1:0] nd  [CUR];
    for (genvar j = 0; j < PREV; j++) begin : g_prv
      if (l == 1) begin : g_from_in
        assign prv[j] = signed'(x[j]);
      end else begin : g_from_lvl
        assign prv[j] = g_lvl[l-1].nd[j];
      end
    end
    for (genvar j = 0; j < CUR; j++) begin : g_node
      logic signed [N-1:0] op_d, op_c;
      if (3 * j + 1 < PREV) begin : g_d
        assign op_d = prv[3*j+1];
      end else begin : g_dz
        assign op_d = '0;
      end
      if (3 * j + 2 < PREV) begin : g_c
        assign op_c = prv[3*j+2];
      end else begin : g_cz
        assign op_c = '0;
      end
      add3_dsp #(.N(N)) u_add (.a(prv[3*j]), .d(op_d), .c(op_c), .p(nd[j]));
    end
  end

  if (LEVELS == 0) begin : g_single
    assign top_sum = signed'(x[0]);
  end else begin : g_root
    assign top_sum = g_lvl[LEVELS].nd[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) sum <= top_sum;
    end
  end
endmodule
