// tb_word_ram: random writes and reads of a 16-word memory with one-cycle read
// latency, including a read and a write of the same word in one cycle, which must
// return the old word (the cell-state fetch-then-replace order).
module tb_word_ram;
  localparam int D = 16;
  logic clk = 0, we = 0;
  logic [3:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [D];
  int checks = 0, failures = 0;

  word_ram #(.W(16), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    for (int k = 0; k < D; k++) begin
      @(negedge clk);
      we = 1; waddr = 4'(k); wdata = 16'($urandom); model[k] = wdata;
    end
    for (int t = 0; t < 300; t++) begin
      int a;
      logic [15:0] old;
      @(negedge clk);
      a = int'($urandom_range(0, D - 1));
      raddr = 4'(a);
      old = model[a];
      we = t[0];
      waddr = t[1] ? 4'(a) : 4'($urandom);
      wdata = 16'($urandom);
      @(negedge clk);
      if (we) model[waddr] = wdata;
      we = 0;
      checks++;
      if (rdata !== old) begin failures++; $display("FAIL addr %0d got %h exp %h", a, rdata, old); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
