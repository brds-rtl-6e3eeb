// address_decoder: turns relative row indices into absolute column indices.
//
// A sparse weight row is stored as its nonzero values plus, for each, the number of
// zeros skipped since the previous nonzero of the same matrix row. Decoding is a
// running sum: col[0] = base + rel[0], col[j] = col[j-1] + 1 + rel[j], where base is 0
// on the first chunk of a row (first = 1) and one past the last column of the previous
// chunk otherwise. The chain of LANES small adders is combinational, so the columns
// appear in the same cycle as the relative indices; the carry to the next chunk is
// registered when in_valid is high. Columns are CW bits wide.
module address_decoder #(
  parameter int unsigned LANES = 64,
  parameter int unsigned AW    = 16,   // width of one stored relative index
  parameter int unsigned CW    = 16    // width of a decoded column index
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic [LANES-1:0][AW-1:0] rel,
  output logic [LANES-1:0][CW-1:0] col
);
  logic [CW-1:0] base_q, run_end;

  always_comb begin
    logic [CW-1:0] run;
    run = first ? '0 : base_q;
    for (int j = 0; j < LANES; j++) begin
      col[j] = run + CW'(rel[j]);
      run    = col[j] + CW'(1);
    end
    run_end = run;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) base_q <= '0;
    else if (in_valid) base_q <= run_end;
  end
endmodule
