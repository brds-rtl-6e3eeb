// tb_add3_dsp: random and corner operands of the three-input adder, checked against
// a clamped full-width sum.
module tb_add3_dsp;
  import tb_ref_pkg::*;
  logic signed [15:0] a, d, c, p;
  int checks = 0, failures = 0;

  add3_dsp dut (.a, .d, .c, .p);

  task automatic check(input int ea, input int ed, input int ec);
    a = 16'(ea); d = 16'(ed); c = 16'(ec);
    #1;
    checks++;
    if (int'(p) != clamp(longint'(ea) + ed + ec)) begin
      failures++;
      $display("FAIL %0d+%0d+%0d got %0d", ea, ed, ec, p);
    end
  endtask

  initial begin
    check(1, 2, 3);
    check(32767, 1, 0);
    check(-32768, -1, -5);
    check(20000, 20000, -30000);
    check(-100, 50, 49);
    repeat (500) check(s16(16'($urandom)), s16(16'($urandom)), s16(16'($urandom)));
    repeat (500) check(int'($urandom_range(0, 2000)) - 1000, int'($urandom_range(0, 2000)) - 1000,
                       int'($urandom_range(0, 2000)) - 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
