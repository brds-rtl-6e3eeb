// tb_mult_array: random operand sets into a 5-lane array; each product is compared
// with the reference fixed-point multiply one cycle after the operands were applied.
module tb_mult_array;
  import tb_ref_pkg::*;
  localparam int R = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [R-1:0][15:0] a, b, p;
  int checks = 0, failures = 0;
  int ea [R], eb [R];

  mult_array #(.R(R)) dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .p);
  always #5 clk = ~clk;

  initial begin
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int j = 0; j < R; j++) begin
        ea[j] = (t < 200) ? s16(16'($urandom)) : int'($urandom_range(0, 1024)) - 512;
        eb[j] = (t < 200) ? s16(16'($urandom)) : int'($urandom_range(0, 1024)) - 512;
        a[j] = 16'(ea[j]); b[j] = 16'(eb[j]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL valid latency"); end
      for (int j = 0; j < R; j++) begin
        checks++;
        if (s16(p[j]) != rmul(ea[j], eb[j])) begin
          failures++;
          $display("FAIL %0d*%0d got %0d exp %0d", ea[j], eb[j], s16(p[j]), rmul(ea[j], eb[j]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
