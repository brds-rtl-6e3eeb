// tb_tree_adder: 84-operand tree (the Gate's 64+20 products). Small random operands
// must sum exactly; large ones are compared with a ternary saturating reduction; an
// all-maximum set must saturate. The result must appear one cycle after the input.
module tb_tree_adder;
  import tb_ref_pkg::*;
  localparam int R = 84;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [R-1:0][15:0] x;
  logic signed [15:0] sum;
  int checks = 0, failures = 0;
  int v[];

  tree_adder #(.R(R)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .sum);
  always #5 clk = ~clk;

  task automatic run(input int mode);
    longint exact;
    exact = 0;
    @(negedge clk);
    for (int j = 0; j < R; j++) begin
      case (mode)
        0: v[j] = int'($urandom_range(0, 600)) - 300;
        1: v[j] = s16(16'($urandom));
        default: v[j] = 32767;
      endcase
      x[j] = 16'(v[j]);
      exact += v[j];
    end
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks += 2;
    if (!out_valid) begin failures++; $display("FAIL latency"); end
    if (mode == 0 && int'(sum) != int'(exact)) begin failures++; $display("FAIL exact %0d vs %0d", sum, exact); end
    if (mode == 1 && int'(sum) != rtree(v, R)) begin failures++; $display("FAIL sat %0d vs %0d", sum, rtree(v, R)); end
    if (mode == 2 && int'(sum) != 32767) begin failures++; $display("FAIL max %0d", sum); end
  endtask

  initial begin
    v = new[R];
    x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (200) run(0);
    repeat (200) run(1);
    run(2);
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
