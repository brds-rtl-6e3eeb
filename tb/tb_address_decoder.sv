// tb_address_decoder: random sparse rows of 24 columns split into chunks of 4 lanes.
// The testbench picks the nonzero columns, derives the relative indices (zeros since
// the previous nonzero) and checks that the decoder returns the original columns,
// including the carry from one chunk of a row to the next. Also Fig. 8's first row.
module tb_address_decoder;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0;
  logic [L-1:0][15:0] rel, col;
  int checks = 0, failures = 0;

  address_decoder #(.LANES(L), .AW(16), .CW(16)) dut (.clk, .rst_n, .in_valid, .first, .rel, .col);
  always #5 clk = ~clk;

  initial begin
    int cols[$];
    int prev;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Fig. 8: W_fh row 0 of a 4x4 matrix keeps columns 0 and 2 -> relative 0, 1
    @(negedge clk);
    rel = '0; rel[0] = 16'd0; rel[1] = 16'd1; first = 1; in_valid = 1;
    #1;
    checks += 2;
    if (col[0] != 0 || col[1] != 2) begin failures++; $display("FAIL fig8 %0d %0d", col[0], col[1]); end
    for (int t = 0; t < 200; t++) begin
      int nnz;
      nnz = L * int'($urandom_range(1, 3));
      cols = {};
      // choose nnz distinct sorted columns out of 24
      for (int cix = 0; cix < 24 && cols.size() < nnz; cix++)
        if (int'($urandom_range(0, 23 - cix)) < nnz - cols.size()) cols.push_back(cix);
      prev = -1;
      for (int ch = 0; ch < nnz / L; ch++) begin
        @(negedge clk);
        first = (ch == 0);
        in_valid = 1;
        for (int j = 0; j < L; j++) begin
          rel[j] = 16'(cols[ch*L+j] - prev - 1);
          prev = cols[ch*L+j];
        end
        #1;
        for (int j = 0; j < L; j++) begin
          checks++;
          if (int'(col[j]) != cols[ch*L+j]) begin
            failures++;
            $display("FAIL t=%0d ch=%0d lane %0d got %0d exp %0d", t, ch, j, col[j], cols[ch*L+j]);
          end
        end
      end
      // an idle cycle must not move the carry
      @(negedge clk);
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
