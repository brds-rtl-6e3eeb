// tb_replicated_ram: 3 copies (6 read ports) of a 40-word memory. After random writes,
// every port reads a different random address each cycle and must return the
// written word one cycle later.
module tb_replicated_ram;
  localparam int C = 3, D = 40;
  logic clk = 0, we = 0;
  logic [15:0] waddr = '0, wdata = '0;
  logic [2*C-1:0][15:0] raddr, rdata;
  logic [15:0] model [D];
  int checks = 0, failures = 0;

  replicated_ram #(.COPIES(C), .DEPTH(D), .W(16), .AW(16)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    int a [2*C];
    raddr = '0;
    for (int k = 0; k < D; k++) begin
      @(negedge clk);
      we = 1; waddr = 16'(k); wdata = 16'($urandom); model[k] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int k = 0; k < 2*C; k++) begin a[k] = int'($urandom_range(0, D - 1)); raddr[k] = 16'(a[k]); end
      // occasionally rewrite a word that is not being read
      we = (t % 7 == 0);
      waddr = 16'((a[0] + 1) % D);
      wdata = 16'($urandom);
      @(negedge clk);
      if (we) model[waddr] = wdata;
      we = 0;
      for (int k = 0; k < 2*C; k++) begin
        checks++;
        if (rdata[k] !== model[a[k]] && !(16'(a[k]) == waddr && t % 7 == 0)) begin
          failures++;
          $display("FAIL port %0d addr %0d", k, a[k]);
        end
      end
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
